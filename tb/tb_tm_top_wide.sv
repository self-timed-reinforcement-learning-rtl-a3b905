// tb_tm_top_wide: end-to-end test of the machine at the width of the
// binarized Iris data (16 boolean features) with 10 clauses (5 negated),
// 320 automata. tm_top_driver supplies the stimulus, the reference model and
// the checks: 3000 operations learning y = f0 AND NOT f1 with 14
// distracting random features, then 200 random inputs. With so few clauses
// and the small threshold T = 2, the machine reaches only about 80 percent
// here, so the accuracy bound is a loose sanity bound (70 percent); the
// real content of this test is the per-operation comparison of all 320
// automata, the feedback types and the sum against the reference model.
module tb_tm_top_wide;
  import tm_pkg::*;
  localparam int NF = 16, NC = 10, NTA = 2 * NC * NF;

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

  tm_top #(.N_FEATURES(NF), .N_CLAUSES(NC)) dut (.*);

  tm_top_driver #(.NF(NF), .NC(NC), .N_TRAIN(3000), .N_EVAL(200), .MIN_PCT(70)) drv (.*);

  initial begin
    wait (complete);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: the whole workload must end well before this time.
  initial begin
    #600_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
