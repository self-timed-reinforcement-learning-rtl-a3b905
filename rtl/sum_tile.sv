// sum_tile: the stage-2 feedback of one clause column.
//
// From the dual-rail clause sum it picks the ring-oscillator tap whose duty
// cycle equals P(T1) = (T - clamp(csum))/2T, samples that tap with the
// column's own random bit generator once the sum is complete, and feeds the
// resulting bit p2 with the machine's stage-1 type into fb2_clause. CNEG
// marks a negated clause. ro_en powers the column's ring oscillator.
//
// Timing: the p2 request is the completion of the sum, delayed by a matched
// delay (REQ_DELAY time units) so that the tap select, which changes at the
// same moment, has settled before the sample is taken. So p2, and after it
// fb2, become valid only once the sum is valid; both return to spacer after
// the sum does. The popcount itself is shared by all columns (one dr_popcount
// in the top) rather than chained through the tiles.
module sum_tile
  import tm_pkg::*;
#(
  parameter bit CNEG   = 1'b0,
  parameter int W      = 4,
  parameter int T      = 2,
  parameter int N_NEG  = 1,
  parameter int PERIOD = 997,
  parameter int REQ_DELAY = 2
) (
  input  logic ro_en,
  input  dr_t  sum [W],
  input  fb_t  fb1,
  output dr_t  p2,
  output fb_t  fb2
);

  localparam int NTAPS = 2 * T + 1;

  logic [$clog2(2*T+2)-1:0] sel;
  logic                     sum_valid;
  logic                     req_p2;

  p2_select #(.W(W), .T(T), .N_NEG(N_NEG)) u_sel (
    .sum  (sum),
    .sel  (sel),
    .valid(sum_valid)
  );

  // Bundling constraint: the request reaches the sampler after the tap
  // select has settled and the latch has followed the newly selected tap.
  matched_delay #(.DELAY(REQ_DELAY)) u_req_dly (
    .a(sum_valid),
    .y(req_p2)
  );

  prbg #(
    .NTAPS     (NTAPS),
    .DUTY_LO_PM(1000),
    .DUTY_HI_PM(0),
    .PERIOD    (PERIOD)
  ) u_p2 (
    .en (ro_en),
    .sel(sel),
    .req(req_p2),
    .ack(p2)
  );

  fb2_clause #(.CNEG(CNEG)) u_fb2 (
    .fb1(fb1),
    .p2 (p2),
    .fb2(fb2)
  );

endmodule
