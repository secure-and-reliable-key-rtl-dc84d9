// puf_pkg -- sizes shared by the RO-PUF front end (ring-oscillator array,
// Walsh-Hadamard transform engine and quantizer).
//
// The array is 16 x 16 ring oscillators, each counted with a 16-bit counter.
// The 2D transform works in place on 20-bit signed words: every one of the
// four butterfly stages adds at most two bits and the halving removes one, so
// a 16-bit input grows to 20 bits.  Coefficient 0 (the DC term) carries the
// array mean and is never turned into a bit, so 255 bits are extracted.
// All of these numbers are the reference design's own; only the AXI data
// widths are this implementation's choice (byte-aligned stream words).
package puf_pkg;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned ROWS     = 16;   // RO array rows
  localparam int unsigned COLS     = 16;   // RO array columns
  localparam int unsigned N_RO     = ROWS * COLS;
  localparam int unsigned CNT_W    = 16;   // RO counter width
  localparam int unsigned DATA_W   = 20;   // transform word width
  localparam int unsigned ADDR_W   = 8;    // data RAM address width
  localparam int unsigned N_BITS   = N_RO - 1;  // extracted bits (DC dropped)

  // AXI4-Stream data widths used on the stream ports.
  localparam int unsigned IN_TDATA_W   = 16;  // counter values into the DWHT
  localparam int unsigned COEF_TDATA_W = 32;  // sign-extended coefficients
  localparam int unsigned BIT_TDATA_W  = 8;   // one extracted bit per beat, in bit 0

  // 100 us stop-timer period at the 54 MHz fabric clock.
  localparam int unsigned MEAS_CYCLES_DEFAULT = 5400;
endpackage
