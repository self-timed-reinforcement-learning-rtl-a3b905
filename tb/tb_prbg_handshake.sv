// tb_prbg_handshake: the sampler driven with a hand-made clock on tap 0,
// following the scenarios of its description:
//   1. req rises while clk is low -> ack = 0; clk then rises -> ack stays 0;
//      req falls -> spacer (the clock side is masked).
//   2. req rises while clk is high -> ack = 1; clk falls -> ack stays 1;
//      req falls -> spacer.
// Also checks the tap multiplexer (tap 1 held high gives 1) and that the
// rails are never high together.
module tb_prbg_handshake;
  import tm_pkg::*;
  logic [1:0] tap = '0;
  logic [1:0] sel = '0;
  logic req = 0;
  dr_t ack;
  int checks = 0, failures = 0;

  prbg_handshake #(.NTAPS(2)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s ack=%b", what, ack); end
  endtask

  always @(ack) check(!(ack.t && ack.f), "rails exclusive");

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20; check(ack == DR_SPACER, "spacer at rest");
    // Scenario 1.
    req = 1; #20; check(ack.f && !ack.t, "req in low phase -> 0");
    tap[0] = 1; #20; check(ack.f && !ack.t, "clk rise keeps 0");
    req = 0; #20; check(ack == DR_SPACER, "masked clock side -> spacer");
    // Scenario 2 (clk still high).
    req = 1; #20; check(ack.t && !ack.f, "req in high phase -> 1");
    tap[0] = 0; #20; check(ack.t && !ack.f, "clk fall keeps 1");
    req = 0; #20; check(ack == DR_SPACER, "spacer after req falls");
    // Low phase again gives 0.
    req = 1; #20; check(ack.f && !ack.t, "0 again");
    req = 0; #20;
    // Multiplexer: tap 1 held high.
    sel = 1; tap[1] = 1; #20;
    req = 1; #20; check(ack.t && !ack.f, "tap 1 selected");
    req = 0; #20; check(ack == DR_SPACER, "final spacer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
