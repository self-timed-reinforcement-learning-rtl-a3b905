// tb_sum_tile: a non-negated and a negated column with T = 2, one negated
// clause in the machine. For each popcount 0..3, 300 four-phase cycles are
// run with stage-1 type T1 and 300 with T2. Each cycle checks that fb2 is
// the type the observed p2 implies (kept or stopped, swapped on the negated
// column) and returns to spacer. Over the trials the fraction of kept
// Type I feedback must be near P(T1) = (T - clamp(csum))/2T with
// csum = popcount - 1 (within 10 points; exact at 0 and 1).
module tb_sum_tile;
  import tm_pkg::*;
  localparam int W = 4, T = 2, N_NEG = 1;
  logic ro_en = 0;
  dr_t sum [W];
  fb_t fb1, fb2_p, fb2_n;
  dr_t p2_p, p2_n;
  int checks = 0, failures = 0;

  sum_tile #(.CNEG(1'b0), .W(W), .T(T), .N_NEG(N_NEG)) dut_p (
    .ro_en(ro_en), .sum(sum), .fb1(fb1), .p2(p2_p), .fb2(fb2_p));
  sum_tile #(.CNEG(1'b1), .W(W), .T(T), .N_NEG(N_NEG), .PERIOD(1009)) dut_n (
    .ro_en(ro_en), .sum(sum), .fb1(fb1), .p2(p2_n), .fb2(fb2_n));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic fb_t expect_fb(int t, bit p, bit neg);
    int r;
    if (t == 1) r = p ? 1 : 0;
    else        r = p ? 0 : 2;
    if (neg && r != 0) r = 3 - r;
    return fb_t'(3'b001 << r);
  endfunction

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < W; i++) sum[i] = DR_SPACER;
    fb1 = '0;
    ro_en = 1;
    #300;
    for (int v = 0; v < 4; v++) begin
      automatic int cs = v - N_NEG;
      automatic int kept1 = 0;
      int expect_pm;
      if (cs > T) cs = T;
      if (cs < -T) cs = -T;
      expect_pm = (T - cs) * 1000 / (2 * T);
      for (int n = 0; n < 600; n++) begin
        automatic int t = (n % 2) + 1;
        #($urandom_range(250, 60));
        fb1 = fb_t'(3'b001 << t);
        for (int i = 0; i < W; i++) sum[i] = dr_enc(v[i], 1'b1);
        #20;
        check((p2_p.t ^ p2_p.f) && (p2_n.t ^ p2_n.f), "p2 valid");
        check(fb2_p == expect_fb(t, p2_p.t, 0), "fb2 non-negated");
        check(fb2_n == expect_fb(t, p2_n.t, 1), "fb2 negated");
        if (t == 1 && fb2_p.t1) kept1++;
        fb1 = '0;
        for (int i = 0; i < W; i++) sum[i] = DR_SPACER;
        #20;
        check(p2_p == DR_SPACER && fb2_p == '0 && fb2_n == '0, "spacer");
      end
      $display("popcount %0d: Type I kept %0d/300, expected %0d per mille", v, kept1, expect_pm);
      if (expect_pm == 0 || expect_pm == 1000) check(kept1 * 1000 / 300 == expect_pm, "P(T1) exact");
      else check(kept1 * 1000 / 300 > expect_pm - 100 && kept1 * 1000 / 300 < expect_pm + 100, "P(T1)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
