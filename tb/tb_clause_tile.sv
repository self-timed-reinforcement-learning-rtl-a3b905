// tb_clause_tile: 500 random valid input sets. The partial clause must equal
// (f | e0) & (~f | e1); each automaton's action must follow the stage-3
// table with its own literal (f for automaton 0, NOT f for automaton 1) and
// include bit (NOT exclude). With go low and the dual-rail inputs at spacer
// every output must be spacer.
module tb_clause_tile;
  import tm_pkg::*;
  logic go;
  dr_t  f, c;
  logic excl [2];
  fb_t  fb2;
  dr_t  p3 [2];
  dr_t  pc;
  act_t act [2];
  int checks = 0, failures = 0;

  clause_tile dut (.*);

  // Stage-3 reference: 0 inaction, 1 penalty, 2 reward.
  function automatic int fb3_ref(int t, bit inc, bit cc, bit x, bit p);
    if (t == 1) begin
      if (inc) return cc ? (p ? 2 : 0) : (p ? 0 : 1);
      if (!cc) return p ? 0 : 2;
      if (!p) return 0;
      return x ? 1 : 2;
    end
    if (t == 2) return (!inc && cc && !x) ? 1 : 0;
    return 0;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      automatic bit fv = 1'($urandom), cv = 1'($urandom);
      automatic bit e0 = 1'($urandom), e1 = 1'($urandom);
      automatic bit q0 = 1'($urandom), q1 = 1'($urandom);
      automatic int t = $urandom_range(2);
      go = 1; f = dr_enc(fv, 1); c = dr_enc(cv, 1);
      excl = '{e0, e1}; fb2 = fb_t'(3'b001 << t);
      p3 = '{dr_enc(q0, 1), dr_enc(q1, 1)};
      #1;
      check(pc.t == ((fv | e0) & (!fv | e1)) && (pc.t ^ pc.f), "pc");
      check(act[0] == act_t'(3'b001 << fb3_ref(t, !e0, cv, fv, q0)), "act 0");
      check(act[1] == act_t'(3'b001 << fb3_ref(t, !e1, cv, !fv, q1)), "act 1");
      go = 0; f = DR_SPACER; c = DR_SPACER; fb2 = '0; p3 = '{DR_SPACER, DR_SPACER};
      #1;
      check(pc == DR_SPACER && act[0] == '0 && act[1] == '0, "spacer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
