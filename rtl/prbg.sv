// prbg: asynchronous pseudorandom bit generator, a ring oscillator with
// selectable duty cycle sampled by a four-phase request.
//
// en powers the ring (off between learning phases). On req high, ack gives
// a dual-rail random bit whose probability of being 1 is the duty cycle of
// the selected tap; on req low ack returns to the spacer. Tap k of NTAPS has
// duty DUTY_LO_PM + (DUTY_HI_PM - DUTY_LO_PM)*k/(NTAPS-1) per mille. One
// generator per automaton (p3, one fixed tap) and one per clause (p2,
// tap chosen from the clause sum) follows the design's distributed
// approach. The ring oscillator and mutex inside are behavioural models.
module prbg
  import tm_pkg::*;
#(
  parameter int NTAPS      = 1,
  parameter int DUTY_LO_PM = 500,
  parameter int DUTY_HI_PM = 500,
  parameter int PERIOD     = 997
) (
  input  logic                       en,
  input  logic [$clog2(NTAPS+1)-1:0] sel,
  input  logic                       req,
  output dr_t                        ack
);

  logic [NTAPS-1:0] tap;

  ring_osc #(
    .NTAPS     (NTAPS),
    .DUTY_LO_PM(DUTY_LO_PM),
    .DUTY_HI_PM(DUTY_HI_PM),
    .PERIOD    (PERIOD)
  ) u_ro (
    .en (en),
    .tap(tap)
  );

  prbg_handshake #(.NTAPS(NTAPS)) u_hs (
    .tap(tap),
    .sel(sel),
    .req(req),
    .ack(ack)
  );

endmodule
