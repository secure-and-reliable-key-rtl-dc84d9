// dwht_data_ram -- the data RAM of the DWHT engine: DEPTH words of W bits,
// one port, holding the whole RO array while it is transformed in place.
//
// Single port with enable and write enable; a write stores `wdata` at `addr`,
// a read returns the word on `rdata` one cycle after `en` (registered output,
// like an FPGA block RAM).  The output holds its value while `en` is low.
// 256 x 20 bits is the reference design's size; the port timing is this
// implementation's.
module dwht_data_ram #(
  parameter int unsigned W     = 20,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  timeunit 1ns; timeprecision 1ps;

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
