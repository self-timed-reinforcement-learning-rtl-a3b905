// tb_mutex: the behavioural mutex. A lone request is granted; a second
// request waits until the first is released and is then granted; requests
// rising together are resolved one way or the other (both ways must occur
// over 100 trials); the two grants are never high together.
module tb_mutex;
  logic r1 = 0, r2 = 0, g1, g2;
  int checks = 0, failures = 0, won1 = 0, won2 = 0;

  mutex dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s r=%b%b g=%b%b", what, r1, r2, g1, g2); end
  endtask

  always @(g1 or g2) check(!(g1 && g2), "exclusive");

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20;
    r1 = 1; #20; check(g1 && !g2, "r1 granted");
    r2 = 1; #20; check(g1 && !g2, "r2 waits");
    r1 = 0; #20; check(!g1 && g2, "r2 granted after release");
    r2 = 0; #20; check(!g1 && !g2, "idle");
    for (int n = 0; n < 100; n++) begin
      r1 = 1; r2 = 1; #20;
      check(g1 ^ g2, "one winner");
      if (g1) won1++; else won2++;
      r1 = 0; r2 = 0; #20;
    end
    check(won1 > 0 && won2 > 0, "both outcomes of a tie");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
