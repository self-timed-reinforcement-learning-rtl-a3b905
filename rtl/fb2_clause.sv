// fb2_clause: stage 2 of the automaton feedback, one instance per clause.
//
// Passes the stage-1 type on, but
//   - swaps Type I and Type II when the clause is negated (CNEG = 1, fixed
//     at design time, so the swap is only wiring), and
//   - stops feedback (T0) according to the random bit p2: Type I survives
//     when p2 = 1 and Type II when p2 = 0. P(p2 = 1) is (T - clamp(sum))/2T,
//     so feedback fades as the clause sum approaches the threshold T.
// No stage-1 feedback (T0) gives T0 without waiting for p2. Inputs: fb1
// one-hot, p2 dual-rail; output one-hot, spacer while the inputs are
// spacers. Combinational.
module fb2_clause
  import tm_pkg::*;
#(
  parameter bit CNEG = 1'b0
) (
  input  fb_t fb1,
  input  dr_t p2,
  output fb_t fb2
);

  logic keep1, keep2;  // Type I / Type II kept by the random choice

  always_comb begin
    keep1  = fb1.t1 & p2.t;
    keep2  = fb1.t2 & p2.f;
    fb2.t0 = fb1.t0 | (fb1.t1 & p2.f) | (fb1.t2 & p2.t);
    fb2.t1 = CNEG ? keep2 : keep1;
    fb2.t2 = CNEG ? keep1 : keep2;
  end

endmodule
