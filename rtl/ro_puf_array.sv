// ro_puf_array -- the 16 x 16 ring-oscillator PUF with its measurement logic,
// seen by software as one AXI4-Lite slave (s_axi_ctrl).
//
// The array is made of ring_oscillator instances (a behavioural model: the
// oscillators themselves are analog in nature) arranged in ROWS rows and
// COLS columns, all ROs of one column sharing an enable.  ro_measure counts
// one column at a time with one counter per row; see ro_measure for the
// register map and timing.
//
// The oscillation frequencies stand in for manufacturing variation.  The
// stage delay of the RO at (r, c) is
//     BASE_DELAY_FS + GRAD_R_FS*r + GRAD_C_FS*c + (hash(DEVICE_SEED, r*COLS+c) mod SPREAD_FS)
// i.e. a smooth systematic gradient across the die, which makes neighbouring
// ROs correlated (what the transform is there to remove), plus an
// independent random part.  With the defaults the ROs run at roughly
// 400-450 MHz, inside the 400-500 MHz of the reference design.  Changing
// DEVICE_SEED gives a different "chip".  This frequency model is this
// implementation's; the array size, the five-inverter rings and the
// frequency range are the reference design's.
module ro_puf_array
  import puf_pkg::*;
#(
  parameter int unsigned R             = ROWS,
  parameter int unsigned C             = COLS,
  parameter int unsigned MEAS_DEFAULT  = MEAS_CYCLES_DEFAULT,
  parameter int unsigned DEVICE_SEED   = 1,
  parameter int unsigned BASE_DELAY_FS = 200_000,
  parameter int unsigned GRAD_R_FS     = 300,
  parameter int unsigned GRAD_C_FS     = 200,
  parameter int unsigned SPREAD_FS     = 40_000,
  parameter int unsigned NOISE_FS      = 2_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready
);
  timeunit 1ns; timeprecision 1ps;

  // Integer mixing function (a 32-bit finaliser) used for the random part.
  function automatic int unsigned ro_hash(int unsigned seed, int unsigned idx);
    logic [31:0] x;
    x = seed * 32'h9e37_79b9 ^ (idx + 32'h7f4a_7c15) * 32'h85eb_ca6b;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  logic [C-1:0]   ro_en;
  logic [R*C-1:0] ro_osc;

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      localparam int unsigned DELAY = BASE_DELAY_FS + GRAD_R_FS * r + GRAD_C_FS * c
                                    + ro_hash(DEVICE_SEED, r * C + c) % SPREAD_FS;
      ring_oscillator #(
        .N_INV         (5),
        .STAGE_DELAY_FS(DELAY),
        .NOISE_FS      (NOISE_FS)
      ) u_ro (
        .en (ro_en[c]),
        .osc(ro_osc[r*C + c])
      );
    end
  end

  ro_measure #(
    .R           (R),
    .C           (C),
    .CW          (CNT_W),
    .MEAS_DEFAULT(MEAS_DEFAULT)
  ) u_meas (
    .clk, .rst_n, .ro_en, .ro_osc,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready
  );
endmodule
