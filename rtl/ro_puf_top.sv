// ro_puf_top -- RO-PUF key-binding system: ring-oscillator array with its
// counters, 2D Walsh-Hadamard transform engine, one-bit quantizer and the
// fuzzy-commitment key binder with its BCH(255,131,37) codec.
//
// The blocks are not chained inside this module.  As in the reference
// system, a processor with DMA sits between them: it starts the RO
// measurements and reads the counts over AXI4-Lite (s_axi_ctrl_*), streams
// the 256 counts into the transform (dwht_in_*) and its 256 coefficients back
// out (dwht_out_*), streams the coefficients through the quantizer
// (quant_in_*, quant_out_*), gathers the 255 extracted bits and hands them,
// with the key or the helper data, to the key binder (fc_*).  The processor
// itself is not part of this RTL; all its buses are ports here, so any
// AXI master/DMA (or a testbench) can take its place.
//
// Timing at the 54 MHz reference clock: 16 column measurements of 100 us
// (1.6 ms), transform 62 us, quantization 14 us, enrollment 133 cycles,
// reconstruction 549 cycles.
//
// Parameters: DEVICE_SEED selects the simulated chip (its RO frequencies),
// NOISE_FS the measurement noise of the RO model, MEAS_DEFAULT the reset
// value of the counting window, BOUNDARY_FILE the quantizer boundaries.
module ro_puf_top
  import puf_pkg::*;
  import bch_pkg::*;
#(
  parameter int unsigned DEVICE_SEED   = 1,
  parameter int unsigned NOISE_FS      = 2_000,
  parameter int unsigned MEAS_DEFAULT  = MEAS_CYCLES_DEFAULT,
  parameter string       BOUNDARY_FILE = ""
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // RO array control (AXI4-Lite slave)
  input  logic [7:0]              s_axi_ctrl_awaddr,
  input  logic                    s_axi_ctrl_awvalid,
  output logic                    s_axi_ctrl_awready,
  input  logic [31:0]             s_axi_ctrl_wdata,
  input  logic [3:0]              s_axi_ctrl_wstrb,
  input  logic                    s_axi_ctrl_wvalid,
  output logic                    s_axi_ctrl_wready,
  output logic [1:0]              s_axi_ctrl_bresp,
  output logic                    s_axi_ctrl_bvalid,
  input  logic                    s_axi_ctrl_bready,
  input  logic [7:0]              s_axi_ctrl_araddr,
  input  logic                    s_axi_ctrl_arvalid,
  output logic                    s_axi_ctrl_arready,
  output logic [31:0]             s_axi_ctrl_rdata,
  output logic [1:0]              s_axi_ctrl_rresp,
  output logic                    s_axi_ctrl_rvalid,
  input  logic                    s_axi_ctrl_rready,
  // transform input / output streams
  input  logic [IN_TDATA_W-1:0]   dwht_in_tdata,
  input  logic                    dwht_in_tvalid,
  output logic                    dwht_in_tready,
  input  logic                    dwht_in_tlast,
  output logic [COEF_TDATA_W-1:0] dwht_out_tdata,
  output logic                    dwht_out_tvalid,
  input  logic                    dwht_out_tready,
  output logic                    dwht_out_tlast,
  // quantizer input / output streams
  input  logic [COEF_TDATA_W-1:0] quant_in_tdata,
  input  logic                    quant_in_tvalid,
  output logic                    quant_in_tready,
  input  logic                    quant_in_tlast,
  output logic [BIT_TDATA_W-1:0]  quant_out_tdata,
  output logic                    quant_out_tvalid,
  input  logic                    quant_out_tready,
  output logic                    quant_out_tlast,
  // key binding
  input  logic                    fc_start,
  input  logic                    fc_reconstruct,
  input  logic [BCH_K-1:0]        fc_key_in,
  input  logic [BCH_N-1:0]        fc_puf_bits,
  input  logic [BCH_N-1:0]        fc_helper_in,
  output logic                    fc_busy,
  output logic                    fc_done,
  output logic [BCH_N-1:0]        fc_helper_out,
  output logic [BCH_K-1:0]        fc_key_out,
  output logic [4:0]              fc_n_err,
  output logic                    fc_fail
);
  timeunit 1ns; timeprecision 1ps;

  ro_puf_array #(
    .DEVICE_SEED (DEVICE_SEED),
    .NOISE_FS    (NOISE_FS),
    .MEAS_DEFAULT(MEAS_DEFAULT)
  ) u_ro_array (
    .clk, .rst_n,
    .s_axi_awaddr (s_axi_ctrl_awaddr),  .s_axi_awvalid(s_axi_ctrl_awvalid),
    .s_axi_awready(s_axi_ctrl_awready), .s_axi_wdata  (s_axi_ctrl_wdata),
    .s_axi_wstrb  (s_axi_ctrl_wstrb),   .s_axi_wvalid (s_axi_ctrl_wvalid),
    .s_axi_wready (s_axi_ctrl_wready),  .s_axi_bresp  (s_axi_ctrl_bresp),
    .s_axi_bvalid (s_axi_ctrl_bvalid),  .s_axi_bready (s_axi_ctrl_bready),
    .s_axi_araddr (s_axi_ctrl_araddr),  .s_axi_arvalid(s_axi_ctrl_arvalid),
    .s_axi_arready(s_axi_ctrl_arready), .s_axi_rdata  (s_axi_ctrl_rdata),
    .s_axi_rresp  (s_axi_ctrl_rresp),   .s_axi_rvalid (s_axi_ctrl_rvalid),
    .s_axi_rready (s_axi_ctrl_rready)
  );

  dwht u_dwht (
    .clk, .rst_n,
    .shrink_in_tdata (dwht_in_tdata),  .shrink_in_tvalid(dwht_in_tvalid),
    .shrink_in_tready(dwht_in_tready), .shrink_in_tlast (dwht_in_tlast),
    .m_axis_tdata    (dwht_out_tdata), .m_axis_tvalid   (dwht_out_tvalid),
    .m_axis_tready   (dwht_out_tready),.m_axis_tlast    (dwht_out_tlast)
  );

  quantizer #(.BOUNDARY_FILE(BOUNDARY_FILE)) u_quant (
    .clk, .rst_n,
    .shrink_in_tdata (quant_in_tdata),  .shrink_in_tvalid(quant_in_tvalid),
    .shrink_in_tready(quant_in_tready), .shrink_in_tlast (quant_in_tlast),
    .m_axis_tdata    (quant_out_tdata), .m_axis_tvalid   (quant_out_tvalid),
    .m_axis_tready   (quant_out_tready),.m_axis_tlast    (quant_out_tlast)
  );

  fuzzy_commitment u_fc (
    .clk, .rst_n,
    .start      (fc_start),     .reconstruct(fc_reconstruct),
    .key_in     (fc_key_in),    .puf_bits   (fc_puf_bits),
    .helper_in  (fc_helper_in), .busy       (fc_busy),
    .done       (fc_done),      .helper_out (fc_helper_out),
    .key_out    (fc_key_out),   .n_err      (fc_n_err),
    .fail       (fc_fail)
  );
endmodule
