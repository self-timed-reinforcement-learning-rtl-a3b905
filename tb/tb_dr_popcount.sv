// tb_dr_popcount: the dual-rail popcount at its default size (3 votes,
// 4-bit result) and at 9 votes. Every input word is compared with its bit
// count; spacers in must give spacers out; the result must not be complete
// (bit 0 valid) while any vote is still a spacer.
module tb_dr_popcount;
  import tm_pkg::*;
  localparam int N1 = 3, W1 = 4, N2 = 9, W2 = 4;
  dr_t x1 [N1];
  dr_t y1 [W1];
  dr_t x2 [N2];
  dr_t y2 [W2];
  int checks = 0, failures = 0;

  dr_popcount dut1 (.x(x1), .y(y1));
  dr_popcount #(.N(N2), .W(W2)) dut2 (.x(x2), .y(y2));

  function automatic bit all_valid1();
    for (int k = 0; k < W1; k++) if (!(y1[k].t ^ y1[k].f)) return 0;
    return 1;
  endfunction

  function automatic int val1();
    int v = 0;
    for (int k = 0; k < W1; k++) v |= int'(y1[k].t) << k;
    return v;
  endfunction

  function automatic int val2();
    int v = 0;
    for (int k = 0; k < W2; k++) v |= int'(y2[k].t) << k;
    return v;
  endfunction

  function automatic bit all_valid2();
    for (int k = 0; k < W2; k++) if (!(y2[k].t ^ y2[k].f)) return 0;
    return 1;
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
    for (int v = 0; v < (1 << N1); v++) begin
      for (int i = 0; i < N1; i++) x1[i] = dr_enc(v[i], 1'b1);
      #1;
      check(all_valid1() && val1() == $countones(v), $sformatf("n=3 v=%0d got %0d", v, val1()));
    end
    for (int v = 0; v < (1 << N2); v++) begin
      for (int i = 0; i < N2; i++) x2[i] = dr_enc(v[i], 1'b1);
      #1;
      check(all_valid2() && val2() == $countones(v), $sformatf("n=9 v=%0d got %0d", v, val2()));
    end
    for (int i = 0; i < N1; i++) x1[i] = DR_SPACER;
    #1;
    for (int k = 0; k < W1; k++) check(y1[k] == DR_SPACER, "spacer");
    x1[0] = dr_enc(1'b1, 1'b1); x1[2] = dr_enc(1'b0, 1'b1);
    #1;
    check(y1[0] == DR_SPACER, "incomplete input gives incomplete result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
