// tsetlin_automaton: a six-state, two-action Tsetlin automaton in one-hot
// form, the storage element of the learning machine.
//
// States x11..x13 give action 1 (exclude), x21..x23 action 2 (include);
// x11 and x21 sit at the decision boundary, x13 and x23 at the ends. The
// next state follows the design's equations:
//   x13 = x13&r | x12&r      x21 = x22&p | x11&p
//   x12 = x11&r | x13&p      x22 = x21&r | x23&p
//   x11 = x12&p | x21&p      x23 = x23&r | x22&r
// so a reward moves away from the boundary (saturating at the ends) and a
// penalty moves toward it, crossing it from x11 or x21.
//
// Timing: this is the synchronous specification that the bundled-data
// automaton is desynchronized from. The state register loads on a rising
// clk edge while commit is high and one of p (penalty) or r (reward) is
// set; with neither set (inaction) it holds. In the array the clock and
// commit come from the shared handshake controller. Reset state is x11
// (exclude, at the boundary), this design's choice.
module tsetlin_automaton
  import tm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      commit,
  input  logic      p,
  input  logic      r,
  output ta_state_t state,
  output logic      exclude
);

  ta_state_t nxt;

  a_one_action: assert property (@(posedge clk) disable iff (!rst_n) commit |-> !(p && r))
    else $error("tsetlin_automaton: penalty and reward together");

  always_comb begin
    nxt.x13 = (state.x13 & r) | (state.x12 & r);
    nxt.x12 = (state.x11 & r) | (state.x13 & p);
    nxt.x11 = (state.x12 & p) | (state.x21 & p);
    nxt.x21 = (state.x22 & p) | (state.x11 & p);
    nxt.x22 = (state.x21 & r) | (state.x23 & p);
    nxt.x23 = (state.x23 & r) | (state.x22 & r);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 state <= '{x11: 1'b1, default: 1'b0};
    else if (commit && (p || r)) state <= nxt;
  end

  assign exclude = state.x11 | state.x12 | state.x13;

endmodule
