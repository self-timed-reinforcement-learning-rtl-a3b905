// ta_array: the bundled-data array of Tsetlin automata that share one
// handshake controller.
//
// Grouping many automata behind one controller removes most of the
// per-automaton handshake cost. Each automaton is split, as in
// desynchronization, into a master stage and a slave stage:
//   capture: on a clk edge with capture high, every automaton's stage-3
//            action (one-hot, from fb3_ta) is latched into the master
//            register as single-rail penalty/reward bits. The controller
//            raises capture only once all actions are valid.
//   commit : on a clk edge with commit high, every automaton takes its next
//            state from the latched action. The controller raises commit
//            only after the datapath has returned to the spacer, so the
//            exclude outputs never change while a value is in flight.
// exclude and state are read without disturbing the automata, which is the
// purpose the design gives the output latch of its automata. act_q is the
// latched action, kept for observation. The controller clock here stands in
// for the matched delays of the self-timed version.
module ta_array
  import tm_pkg::*;
#(
  parameter int N_TA = 18
) (
  input  logic      clk,
  input  logic      rst_n,
  input  act_t      act     [N_TA],
  input  logic      capture,
  input  logic      commit,
  output logic      exclude [N_TA],
  output ta_state_t state   [N_TA],
  output act_t      act_q   [N_TA]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_TA; i++) act_q[i] <= '{inaction: 1'b1, default: 1'b0};
    end else if (capture) begin
      for (int i = 0; i < N_TA; i++) act_q[i] <= act[i];
    end
  end

  for (genvar i = 0; i < N_TA; i++) begin : g_ta
    tsetlin_automaton u_ta (
      .clk    (clk),
      .rst_n  (rst_n),
      .commit (commit),
      .p      (act_q[i].penalty),
      .r      (act_q[i].reward),
      .state  (state[i]),
      .exclude(exclude[i])
    );
  end

  a_capture_valid: assert property (@(posedge clk) disable iff (!rst_n)
      capture |-> act_valid(act[0]) && act_valid(act[N_TA-1]))
    else $error("ta_array: capture before the actions were valid");

endmodule
