// quant_boundary_rom -- ROM of quantization boundaries, one W-bit signed word
// per used transform coefficient (DEPTH = 255 for a 16 x 16 array with the DC
// coefficient dropped: 255 x 20 bits, 638 bytes).
//
// With one bit per coefficient and no histogram equalization, the boundary of
// coefficient i is the median (for a Gaussian model, the mean) of that
// coefficient over the device population, measured by the manufacturer.
// The contents are loaded from INIT_FILE ($readmemh, one hex word per line,
// word 0 = coefficient 1) when it is given; otherwise every boundary is 0,
// the median of an AC coefficient when there is no systematic variation
// common to all devices.  Synchronous read: `data` follows `en` by a cycle.
module quant_boundary_rom #(
  parameter int unsigned W         = 20,
  parameter int unsigned DEPTH     = 255,
  parameter string       INIT_FILE = ""
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic signed [W-1:0]      data
);
  timeunit 1ns; timeprecision 1ps;

  logic [W-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) rom[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
  end

  always_ff @(posedge clk) begin
    if (en) data <= rom[addr];
  end
endmodule
