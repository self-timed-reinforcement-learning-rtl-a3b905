// dr_popcount: dual-rail population count of N clause votes.
//
// The count is accumulated through chains of dual-rail half adders (sum =
// XOR, carry = AND): each vote after the first is added into a W-bit
// accumulator. The first vote seeds bit 0; the upper bits start as a 0 that
// becomes valid together with that first vote, so every output is a spacer
// when all votes are spacers. Carries that are already known to be 0
// propagate early. Bit 0 of the result is the XOR of all votes, so the
// result is complete only once every vote has arrived; completion is
// detected on the outputs alone.
//
// The design builds its popcount from DR half and full adders with two spacer
// inverters; that schematic is not given, so this adder arrangement is this
// design's own and keeps one spacer polarity everywhere (no spacer inverters
// are needed). W must satisfy 2**W > N.
module dr_popcount
  import tm_pkg::*;
#(
  parameter int N = 3,
  parameter int W = 4
) (
  input  dr_t x [N],
  output dr_t y [W]
);

  initial assert (2 ** W > N) else $error("dr_popcount: W too small for N");

  always_comb begin
    dr_t acc [W];
    dr_t carry;
    dr_t s;
    acc[0] = x[0];
    for (int k = 1; k < W; k++) acc[k] = '{t: 1'b0, f: dr_valid(x[0])};
    for (int i = 1; i < N; i++) begin
      carry = x[i];
      for (int k = 0; k < W; k++) begin
        s      = dr_xor(acc[k], carry);
        carry  = dr_and(acc[k], carry);
        acc[k] = s;
      end
    end
    y = acc;
  end

endmodule
