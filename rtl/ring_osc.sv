// ring_osc: BEHAVIOURAL MODEL of a power-gated, inverter-only ring
// oscillator with taps of different duty cycle. Not synthesizable; the
// real part is an analog/cell-level structure.
//
// The ring is built from inverters with asymmetric rise and fall times, so
// every tap shows the same period but its own duty cycle; a multiplexer
// after it picks the duty cycle, and so the probability of sampling a 1.
// The ring is power-gated by en (header/footer switch). Because no NAND or
// NOR gate sits in the ring, it starts in an unpredictable phase when
// powered; the model draws that phase at random on every power-up and adds
// a random jitter to every half period. While en is low all taps are 0.
//
// Tap k has a high time of DUTY_PM(k)/1000 of the period, with DUTY_PM
// spread linearly from DUTY_LO_PM (tap 0) to DUTY_HI_PM (tap NTAPS-1).
// Taps at 0 or 1000 per mille stay constant 0 or 1. Times are in simulator
// time units; PERIOD and JITTER are this model's choices.
module ring_osc #(
  parameter int NTAPS      = 5,
  parameter int DUTY_LO_PM = 1000,
  parameter int DUTY_HI_PM = 0,
  parameter int PERIOD     = 997,
  parameter int JITTER     = 40
) (
  input  logic             en,
  output logic [NTAPS-1:0] tap
);

  // Free-running level of each tap; power gating forces the outputs low at
  // once.
  logic [NTAPS-1:0] lvl;
  assign tap = lvl & {NTAPS{en}};

  function automatic int duty_pm(int k);
    if (NTAPS == 1) return DUTY_LO_PM;
    return DUTY_LO_PM + ((DUTY_HI_PM - DUTY_LO_PM) * k) / (NTAPS - 1);
  endfunction

  // Phase of the ring at power-up, shared by all taps.
  int unsigned phase0;
  always @(posedge en) phase0 <= $urandom_range(PERIOD - 1);

  for (genvar k = 0; k < NTAPS; k++) begin : g_tap
    localparam int HI = (PERIOD * duty_pm(k)) / 1000;
    localparam int LO = PERIOD - HI;
    int ph;
    initial lvl[k] = 1'b0;
    always begin
      wait (en);
      #1;
      // Position inside the period of this tap, offset along the ring.
      ph = int'((phase0 + (k * PERIOD) / NTAPS) % PERIOD);
      if (HI == 0) begin
        lvl[k] = 1'b0;
        wait (!en);
      end else if (LO == 0) begin
        lvl[k] = 1'b1;
        wait (!en);
      end else begin
        if (ph < HI) begin
          lvl[k] = 1'b1;
          #(HI - ph);
        end else begin
          lvl[k] = 1'b0;
          #(PERIOD - ph);
        end
        while (en) begin
          lvl[k] = ~lvl[k];
          if (lvl[k]) #(HI + $urandom_range(JITTER) - JITTER / 2);
          else        #(LO + $urandom_range(JITTER) - JITTER / 2);
        end
      end
      lvl[k] = 1'b0;
    end
  end

endmodule
