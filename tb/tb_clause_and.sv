// tb_clause_and: the dual-rail clause AND over N = 3 partial clauses, all
// 8 valid input words against the AND of their bits, plus the spacer case
// and early resolution to 0 with the other inputs still at spacer.
module tb_clause_and;
  import tm_pkg::*;
  localparam int N = 3;
  dr_t pc [N];
  dr_t c;
  int checks = 0, failures = 0;

  clause_and #(.N(N)) dut (.pc(pc), .c(c));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s c=%b", what, c); end
  endtask

  initial begin
    #1000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << N); v++) begin
      for (int i = 0; i < N; i++) pc[i] = dr_enc(v[i], 1'b1);
      #1;
      check(c.t == (v == (1 << N) - 1) && (c.t ^ c.f), "value");
    end
    for (int i = 0; i < N; i++) pc[i] = DR_SPACER;
    #1; check(c == DR_SPACER, "spacer");
    pc[1] = dr_enc(1'b0, 1'b1);
    #1; check(c.f && !c.t, "early 0");
    pc[1] = dr_enc(1'b1, 1'b1);
    #1; check(c == DR_SPACER, "1 waits for all inputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
