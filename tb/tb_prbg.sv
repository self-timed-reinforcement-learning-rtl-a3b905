// tb_prbg: statistics of the complete generator. A 5-tap generator (duty
// 1000, 750, 500, 250, 0 per mille) is sampled 400 times per tap by a
// four-phase request at an unrelated rate; the fraction of ones must be
// within 8 points of the duty (exact for 0 and 1000). A 1-tap generator at
// 744 per mille, the stage-3 bias (s-1)/s for s = 3.9, is checked the same
// way. Each request must get a valid, one-hot answer and a spacer after it.
module tb_prbg;
  import tm_pkg::*;
  logic en = 0;
  logic [2:0] sel = '0;
  logic req = 0, req1 = 0;
  dr_t ack, ack1;
  int checks = 0, failures = 0;

  prbg #(.NTAPS(5), .DUTY_LO_PM(1000), .DUTY_HI_PM(0)) dut (.en(en), .sel(sel), .req(req), .ack(ack));
  prbg #(.NTAPS(1), .DUTY_LO_PM(744), .DUTY_HI_PM(744), .PERIOD(1013)) dut1 (
    .en(en), .sel(1'b0), .req(req1), .ack(ack1));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    en = 1;
    #500;
    for (int k = 0; k < 5; k++) begin
      automatic int expect_pm = 1000 - 250 * k;
      int got_pm;
      sel = 3'(k);
      ones = 0;
      for (int n = 0; n < 400; n++) begin
        #($urandom_range(300, 100));
        req = 1;
        #20;
        check(ack.t ^ ack.f, "valid bit");
        ones += int'(ack.t);
        req = 0;
        #20;
        check(ack == DR_SPACER, "spacer");
      end
      got_pm = ones * 1000 / 400;
      $display("tap %0d: %0d per mille ones (duty %0d)", k, got_pm, expect_pm);
      if (expect_pm == 0 || expect_pm == 1000) check(got_pm == expect_pm, "constant tap");
      else check(got_pm > expect_pm - 80 && got_pm < expect_pm + 80, "biased tap");
    end
    ones = 0;
    for (int n = 0; n < 400; n++) begin
      #($urandom_range(300, 100));
      req1 = 1; #20;
      check(ack1.t ^ ack1.f, "valid bit p3");
      ones += int'(ack1.t);
      req1 = 0; #20;
    end
    $display("p3 generator: %0d per mille ones", ones * 1000 / 400);
    check(ones * 1000 / 400 > 744 - 80 && ones * 1000 / 400 < 744 + 80, "p3 bias");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
