// tb_partial_clause: exhaustive check of the dual-rail partial clause.
// Every valid combination of f, e0 and e1 is compared with
// (f | e0) & (~f | e1); all-spacer inputs must give a spacer; and the early
// cases (a literal that is 0 and not excluded) must resolve with the other
// exclude input still at spacer.
module tb_partial_clause;
  import tm_pkg::*;
  dr_t f, e0, e1, pc;
  int checks = 0, failures = 0;

  partial_clause dut (.f(f), .e0(e0), .e1(e1), .pc(pc));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: f=%b e0=%b e1=%b pc=%b", what, f, e0, e1, pc);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      f  = dr_enc(v[0], 1'b1);
      e0 = dr_enc(v[1], 1'b1);
      e1 = dr_enc(v[2], 1'b1);
      #1;
      check(pc.t == ((v[0] | v[1]) & (!v[0] | v[2])) && (pc.t ^ pc.f), "value");
    end
    f = DR_SPACER; e0 = DR_SPACER; e1 = DR_SPACER; #1;
    check(pc == DR_SPACER, "spacer");
    // f = 0, e1 don't care, e0 = 0 (literal f included and false) -> 0 early.
    f = dr_enc(1'b0, 1'b1); e0 = dr_enc(1'b0, 1'b1); e1 = DR_SPACER; #1;
    check(pc.f && !pc.t, "early 0 on literal f");
    f = dr_enc(1'b1, 1'b1); e0 = DR_SPACER; e1 = dr_enc(1'b0, 1'b1); #1;
    check(pc.f && !pc.t, "early 0 on literal ~f");
    // Incomplete inputs that cannot decide must stay spacer.
    f = dr_enc(1'b1, 1'b1); e0 = DR_SPACER; e1 = DR_SPACER; #1;
    check(pc == DR_SPACER, "undecided stays spacer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
