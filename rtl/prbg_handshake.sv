// prbg_handshake: the handshake sampler of the asynchronous pseudorandom
// bit generator.
//
// A free-running ring oscillator clock, uncorrelated with the datapath, is
// sampled by the datapath's own request. The tap selected by sel sets the
// duty cycle and so P(1). Parts, as the design names them: a tap
// multiplexer, a set-dominant latch, a mutex and an AND gate.
//   - latch: set while clk is high; reset only while clk and req are both
//     low; otherwise it holds (so a clk fall during a request is ignored).
//   - mutex: arbitrates between req and the latch output.
//   - ack.f is the mutex grant of req; ack.t is the grant of the latch ANDed
//     with req.
// A request in the low phase of clk wins the mutex and returns 0; a request
// in the high phase finds the latch already holding the mutex and returns 1.
// When req falls, the output returns to the spacer {0,0}. ack is dual-rail
// and the two rails are never high together.
//
// Handshake: four-phase, req high -> ack valid, req low -> ack spacer. sel
// must be stable while req is high. The wiring between the four parts is
// this design's reading of how the design's text describes their behaviour.
module prbg_handshake
  import tm_pkg::*;
#(
  parameter int NTAPS = 1
) (
  input  logic [NTAPS-1:0]         tap,
  input  logic [$clog2(NTAPS+1)-1:0] sel,
  input  logic                     req,
  output dr_t                      ack
);

  logic clk_sel, q, g_req, g_clk;

  assign clk_sel = tap[sel];

  // Set-dominant latch: S = clk_sel, R = !clk_sel && !req.
  always_latch begin
    if (clk_sel)   q = 1'b1;
    else if (!req) q = 1'b0;
  end

  mutex u_mutex (
    .r1(req),
    .r2(q),
    .g1(g_req),
    .g2(g_clk)
  );

  assign ack.f = g_req;
  assign ack.t = g_clk & req;

endmodule
