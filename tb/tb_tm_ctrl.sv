// tb_tm_ctrl: the sequencer against a scripted environment. For learning
// and inference operations with random completion delays it checks the
// order ARM -> DATA (go) -> CAPTURE -> RTZ -> COMMIT/done, that go stays
// high until capture and drops after it, that the rings are powered only for
// learning, and the cycle count: 5 + data delay + spacer delay cycles
// from start to done.
module tb_tm_ctrl;
  logic clk = 0, rst_n = 0, start = 0, learn = 0, all_valid = 0, all_spacer = 1;
  logic go, ro_en, capture, commit, busy, done;
  int checks = 0, failures = 0;

  tm_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      automatic int dv = $urandom_range(5), ds = $urandom_range(5), cyc = 0;
      automatic bit l = 1'($urandom);
      @(negedge clk);
      check(!busy && !go, "idle");
      start = 1; learn = l;
      @(negedge clk);
      start = 0; learn = 0; cyc++;
      check(busy && !go && ro_en == l, "arm");
      @(negedge clk); cyc++;
      check(go && !capture, "data phase");
      all_spacer = 0;
      repeat (dv) begin @(negedge clk); cyc++; check(go && !capture && ro_en == l, "wait valid"); end
      all_valid = 1;
      @(negedge clk); cyc++;
      check(capture && go, "capture");
      @(negedge clk); cyc++;
      check(!go && !capture && !commit, "return to zero");
      all_valid = 0;
      repeat (ds) begin @(negedge clk); cyc++; check(!go && !commit, "wait spacer"); end
      all_spacer = 1;
      @(negedge clk); cyc++;
      check(commit && done, "commit");
      check(cyc == 5 + dv + ds, $sformatf("cycle count %0d", cyc));
      @(negedge clk);
      check(!busy && !ro_en, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
