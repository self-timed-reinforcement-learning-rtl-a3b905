// tm_ctrl: the four-phase sequencer of one machine operation (an inference,
// or an inference with learning).
//
//   IDLE    wait for start; the inputs are latched outside.
//   ARM     power up the ring oscillators for a learning operation (one
//           cycle, so sampling starts from a running ring).
//   DATA    go = 1: the dual-rail inputs leave the spacer. Wait until the
//           completion detector reports every output valid (all_valid).
//   CAPTURE capture = 1 for one cycle: the automaton array's master stage
//           latches every stage-3 action, results are registered.
//   RTZ     go = 0: return to zero. Wait until every output is back at the
//           spacer (all_spacer).
//   COMMIT  commit = 1 for one cycle: the automata take their new states.
//           done = 1 at the same time.
// The completion signals come from the outputs only (reduced completion
// detection). The clocked sequencer is this design's stand-in for the
// environment's handshake and the array's latch controller.
module tm_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic learn,
  input  logic all_valid,
  input  logic all_spacer,
  output logic go,
  output logic ro_en,
  output logic capture,
  output logic commit,
  output logic busy,
  output logic done
);

  typedef enum logic [2:0] {IDLE, ARM, DATA, CAPTURE, RTZ, COMMIT} state_e;
  state_e state, state_nxt;
  logic   learn_q;

  always_comb begin
    state_nxt = state;
    unique case (state)
      IDLE:    if (start) state_nxt = ARM;
      ARM:     state_nxt = DATA;
      DATA:    if (all_valid) state_nxt = CAPTURE;
      CAPTURE: state_nxt = RTZ;
      RTZ:     if (all_spacer) state_nxt = COMMIT;
      COMMIT:  state_nxt = IDLE;
      default: state_nxt = IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      learn_q <= 1'b0;
    end else begin
      state <= state_nxt;
      if (state == IDLE && start) learn_q <= learn;
    end
  end

  assign go      = (state == DATA) || (state == CAPTURE);
  assign ro_en   = learn_q && (state != IDLE);
  assign capture = (state == CAPTURE);
  assign commit  = (state == COMMIT);
  assign busy    = (state != IDLE);
  assign done    = (state == COMMIT);

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
      capture |-> all_valid) else $error("tm_ctrl: capture without completion");

endmodule
