// tb_matched_delay: both edges of the input must reach the output exactly
// DELAY time units later, and not before.
module tb_matched_delay;
  localparam int DELAY = 7;
  logic a = 0, y;
  int checks = 0, failures = 0;

  matched_delay #(.DELAY(DELAY)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    for (int n = 0; n < 20; n++) begin
      a = ~a;
      #(DELAY - 1); check(y != a, "not before the delay");
      #2;           check(y == a, "after the delay");
      #($urandom_range(20, 10));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
