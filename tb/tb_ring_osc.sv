// tb_ring_osc: the behavioural ring oscillator with 5 taps spread from
// 1000 to 0 per mille. Over 200 periods the measured high fraction of each
// tap must be within 3 percentage points of its duty cycle; every tap must
// be 0 while the ring is powered down; the power-up phase must vary.
module tb_ring_osc;
  localparam int NTAPS = 5, PERIOD = 997;
  logic en = 0;
  logic [NTAPS-1:0] tap;
  int checks = 0, failures = 0;
  int hi [NTAPS];
  int first_level [2];

  ring_osc #(.NTAPS(NTAPS), .DUTY_LO_PM(1000), .DUTY_HI_PM(0), .PERIOD(PERIOD)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #(PERIOD * 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100;
    check(tap == '0, "off");
    en = 1;
    #10;
    for (int n = 0; n < 200 * PERIOD / 10; n++) begin
      for (int k = 0; k < NTAPS; k++) hi[k] += int'(tap[k]);
      #10;
    end
    for (int k = 0; k < NTAPS; k++) begin
      automatic int expect_pm = 1000 - 1000 * k / (NTAPS - 1);
      automatic int got_pm = hi[k] * 1000 / (200 * PERIOD / 10);
      $display("tap %0d duty %0d per mille (expect %0d)", k, got_pm, expect_pm);
      check(got_pm > expect_pm - 30 && got_pm < expect_pm + 30, $sformatf("tap %0d duty", k));
    end
    en = 0;
    #50;
    check(tap == '0, "powered down");
    // Power up 40 times; the level of tap 2 just after power-up should vary.
    for (int n = 0; n < 40; n++) begin
      en = 1; #5;
      first_level[tap[2]]++;
      en = 0; #20;
    end
    check(first_level[0] > 0 && first_level[1] > 0, "random start phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
