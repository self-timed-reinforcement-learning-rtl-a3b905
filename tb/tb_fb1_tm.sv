// tb_fb1_tm: stage-1 feedback for every learn/yexp pair, the spacer, and T0
// produced from learn = 0 while yexp is still a spacer.
module tb_fb1_tm;
  import tm_pkg::*;
  dr_t learn, yexp;
  fb_t fb1;
  int checks = 0, failures = 0;

  fb1_tm dut (.learn(learn), .yexp(yexp), .fb1(fb1));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s fb1=%b", what, fb1); end
  endtask

  initial begin
    #1000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    learn = dr_enc(0, 1); yexp = dr_enc(0, 1); #1; check(fb1 == 3'b001, "learn0 yexp0");
    learn = dr_enc(0, 1); yexp = dr_enc(1, 1); #1; check(fb1 == 3'b001, "learn0 yexp1");
    learn = dr_enc(1, 1); yexp = dr_enc(1, 1); #1; check(fb1 == 3'b010, "learn1 yexp1 -> T1");
    learn = dr_enc(1, 1); yexp = dr_enc(0, 1); #1; check(fb1 == 3'b100, "learn1 yexp0 -> T2");
    learn = DR_SPACER; yexp = DR_SPACER; #1; check(fb1 == 3'b000, "spacer");
    learn = dr_enc(0, 1); #1; check(fb1 == 3'b001, "early T0");
    learn = dr_enc(1, 1); #1; check(fb1 == 3'b000, "T1/T2 wait for yexp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
