// p2_select: picks the ring-oscillator tap that gives p2 its probability.
//
// Stage-2 feedback keeps Type I with probability P(T1) = (T - clamp(csum))/2T
// and Type II with P(T2) = 1 - P(T1), where csum is the signed class sum and
// clamp limits it to [-T, T]. A p2 generator has 2T+1 taps, tap k with duty
// (2T - k)/2T, so tap k = clamp(csum) + T gives P(p2 = 1) = P(T1).
//
// The dual-rail popcount counts positive clauses that output 1 plus negated
// clauses that output 0, so csum = popcount - N_NEG. Input sum is the DR
// popcount; sel is single-rail and meaningful when valid is high, which is
// when every sum bit is valid; valid then serves as the request of the p2
// generator, so the tap is stable before it is sampled. Combinational.
module p2_select
  import tm_pkg::*;
#(
  parameter int W     = 4,
  parameter int T     = 2,
  parameter int N_NEG = 1
) (
  input  dr_t                      sum [W],
  output logic [$clog2(2*T+2)-1:0] sel,
  output logic                     valid
);

  logic [W-1:0] val;
  int           csum;

  always_comb begin
    valid = 1'b1;
    for (int i = 0; i < W; i++) begin
      val[i] = sum[i].t;
      valid  = valid & dr_valid(sum[i]);
    end
    csum = int'(val) - N_NEG;
    if (csum > T)       csum = T;
    else if (csum < -T) csum = -T;
    sel = ($clog2(2*T+2))'(csum + T);
  end

endmodule
