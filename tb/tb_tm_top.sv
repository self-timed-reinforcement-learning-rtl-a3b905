// tb_tm_top: end-to-end test of the whole machine at its default size
// (3 features, 3 clauses, 18 automata, T = 2, s = 3.9), with no parameter
// overridden. tm_top_driver supplies the stimulus, the reference model and
// the checks: 3000 learning/inference operations on y = f0 AND NOT f1, then
// all 8 inputs must be classified correctly, and every mechanism of the
// machine must have occurred.
module tb_tm_top;
  import tm_pkg::*;
  localparam int NF = 3, NC = 3, NTA = 2 * NC * NF;

  logic clk = 0;
  logic rst_n, start, learn, yexp;
  logic [NF-1:0] f;
  logic busy, done, class_out;
  logic [3:0] sum_out;
  fb_t fb1_out;
  fb_t fb2_out [NC];
  act_t act_out [NTA];
  logic exclude [NTA];
  ta_state_t ta_state [NTA];
  int checks, failures;
  logic complete;

  always #5 clk = ~clk;

  tm_top dut (.*);

  tm_top_driver #(.NF(NF), .NC(NC), .N_TRAIN(3000), .N_EVAL(8), .MIN_PCT(100)) drv (.*);

  initial begin
    wait (complete);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: the whole workload must end well before this time.
  initial begin
    #60_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
