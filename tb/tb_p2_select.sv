// tb_p2_select: for every 4-bit popcount value, with T = 2 and one negated
// clause, sel must be clamp(popcount - 1, -2, 2) + 2 and valid must be high;
// a sum with any bit at spacer must give valid low.
module tb_p2_select;
  import tm_pkg::*;
  localparam int W = 4, T = 2, N_NEG = 1;
  dr_t sum [W];
  logic [2:0] sel;
  logic valid;
  int checks = 0, failures = 0;

  p2_select #(.W(W), .T(T), .N_NEG(N_NEG)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s sel=%0d valid=%b", what, sel, valid); end
  endtask

  initial begin
    #1000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      automatic int cs = v - N_NEG;
      if (cs > T) cs = T;
      if (cs < -T) cs = -T;
      for (int i = 0; i < W; i++) sum[i] = dr_enc(v[i], 1'b1);
      #1;
      check(valid && sel == 3'(cs + T), $sformatf("popcount %0d", v));
    end
    sum[2] = DR_SPACER; #1;
    check(!valid, "incomplete sum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
