// ring_oscillator -- BEHAVIOURAL MODEL (not synthesizable) of one ring
// oscillator of the PUF array.
//
// A real ring oscillator is an odd chain of inverters closed through an enable
// gate; its frequency depends on the process variation of the very gates it is
// built from, which is the randomness the PUF extracts.  It cannot be written
// as synthesizable logic, so this model only reproduces its behaviour at the
// pins: while `en` is high, `osc` toggles every N_INV stage delays; while `en`
// is low, `osc` rests at 0.  The device-specific part of the frequency is the
// STAGE_DELAY_FS parameter.  Measurement noise is modelled by drawing, every
// time the oscillator is started, a fresh half period uniformly within
// +-NOISE_FS of the nominal one, so repeated measurements of the same device
// differ slightly, as enrollment and reconstruction readings do.
//
// Five inverters per ring and a 400-500 MHz oscillation range are the
// reference design's; the default stage delay (220 ps, about 455 MHz) and the
// noise model are this model's own choices.
module ring_oscillator #(
  parameter int unsigned N_INV          = 5,        // inverters in the ring
  parameter int unsigned STAGE_DELAY_FS = 220_000,  // delay of one inverter
  parameter int unsigned NOISE_FS       = 0         // half-period noise bound
) (
  input  logic en,   // oscillation enable
  output logic osc   // oscillator output, 0 while disabled
);
  timeunit 1ns; timeprecision 1fs;

  localparam int unsigned HALF_FS = N_INV * STAGE_DELAY_FS;

  int unsigned half_fs;

  initial osc = 1'b0;

  always begin
    wait (en);
    half_fs = HALF_FS - NOISE_FS + ($urandom % (2 * NOISE_FS + 1));
    while (en) begin
      #(half_fs * 1fs);
      osc = en ? ~osc : 1'b0;
    end
    osc = 1'b0;
  end
endmodule
