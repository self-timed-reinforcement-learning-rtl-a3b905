// fb1_tm: stage 1 of the automaton feedback, one instance per machine.
//
// Chooses the feedback type for the whole machine: none (T0) when learn is
// 0, Type I (T1) when learning a sample whose expected class yexp is 1, and
// Type II (T2) when yexp is 0. Inputs are dual-rail; the output is one-hot
// over the rails {t2, t1, t0} with all-zero as the spacer. T0 is produced
// from learn alone, without waiting for yexp. Combinational.
module fb1_tm
  import tm_pkg::*;
(
  input  dr_t learn,
  input  dr_t yexp,
  output fb_t fb1
);

  always_comb begin
    fb1.t0 = learn.f;
    fb1.t1 = learn.t & yexp.t;
    fb1.t2 = learn.t & yexp.f;
  end

endmodule
