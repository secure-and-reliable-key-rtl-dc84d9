// tb_ro_puf_array -- self-checking testbench of the RO array with its
// measurement logic, at 4 x 4 ROs and a 1000-cycle (18.5 us) window.
//
// Instance A (no noise): every count must match the frequency model written
// out here (stage delay = base + gradient + hash mod spread, five stages)
// within +-2, and must lie inside the 400-500 MHz band of the reference
// design; a repeated measurement must agree within +-1.  Instance B (same
// device seed, with noise) must stay within the noise bound of A's counts
// and must differ from A in at least one RO.
module tb_ro_puf_array;
  timeunit 1ns; timeprecision 1ps;

  localparam int R = 4, C = 4, MEAS = 1000, SEED = 7;
  localparam real TCLK = 18.518;

  logic clk = 0, rst_n = 0;
  always #(TCLK / 2) clk = ~clk;

  // one AXI4-Lite bus per instance
  logic [7:0]  awaddr [2], araddr [2];
  logic        awvalid [2], awready [2], wvalid [2], wready [2], bvalid [2], bready [2];
  logic        arvalid [2], arready [2], rvalid [2], rready [2];
  logic [31:0] wdata [2], rdata [2];
  logic [1:0]  bresp [2], rresp [2];

  for (genvar i = 0; i < 2; i++) begin : g_dut
    ro_puf_array #(.R(R), .C(C), .MEAS_DEFAULT(MEAS), .DEVICE_SEED(SEED),
                   .NOISE_FS(i == 0 ? 0 : 3000)) dut (
      .clk, .rst_n,
      .s_axi_awaddr(awaddr[i]), .s_axi_awvalid(awvalid[i]), .s_axi_awready(awready[i]),
      .s_axi_wdata(wdata[i]), .s_axi_wstrb(4'hf), .s_axi_wvalid(wvalid[i]), .s_axi_wready(wready[i]),
      .s_axi_bresp(bresp[i]), .s_axi_bvalid(bvalid[i]), .s_axi_bready(bready[i]),
      .s_axi_araddr(araddr[i]), .s_axi_arvalid(arvalid[i]), .s_axi_arready(arready[i]),
      .s_axi_rdata(rdata[i]), .s_axi_rresp(rresp[i]), .s_axi_rvalid(rvalid[i]), .s_axi_rready(rready[i])
    );
  end

  int checks = 0, failures = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  task automatic axi_write(int i, logic [7:0] a, logic [31:0] d);
    awaddr[i] <= a; wdata[i] <= d; awvalid[i] <= 1; wvalid[i] <= 1; bready[i] <= 1;
    do @(posedge clk); while (!(awvalid[i] && awready[i]));
    awvalid[i] <= 0; wvalid[i] <= 0;
    do @(posedge clk); while (!bvalid[i]);
    bready[i] <= 0;
    @(negedge clk);
  endtask

  task automatic axi_read(int i, logic [7:0] a, output logic [31:0] d);
    araddr[i] <= a; arvalid[i] <= 1; rready[i] <= 1;
    do @(posedge clk); while (!arready[i]);
    arvalid[i] <= 0;
    do @(posedge clk); while (!rvalid[i]);
    d = rdata[i];
    rready[i] <= 0;
    @(negedge clk);
  endtask

  // Stage delay of RO (r,c) in fs, as the array's frequency model defines it.
  function automatic longint stage_fs(int r, int c);
    logic [31:0] x;
    x = SEED * 32'h9e37_79b9 ^ ((r * C + c) + 32'h7f4a_7c15) * 32'h85eb_ca6b;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return 200_000 + 300 * r + 200 * c + longint'(x % 40_000);
  endfunction

  int cnt [2][2][R][C];   // [instance][repeat][r][c]

  task automatic measure_all(int i, int rep);
    logic [31:0] st;
    for (int c = 0; c < C; c++) begin
      axi_write(i, 8'h00, 32'(c << 8) | 32'h1);
      do axi_read(i, 8'h04, st); while (!st[1]);
      for (int r = 0; r < R; r++) begin
        axi_read(i, 8'(8'h40 + 4 * r), st);
        cnt[i][rep][r][c] = int'(st);
      end
    end
  endtask

  initial begin
    real window_ps, lo, hi;
    int expected, diffs;
    for (int i = 0; i < 2; i++) begin
      awaddr[i] = 0; araddr[i] = 0; awvalid[i] = 0; wvalid[i] = 0; bready[i] = 0;
      arvalid[i] = 0; rready[i] = 0; wdata[i] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      begin measure_all(0, 0); measure_all(0, 1); end
      begin measure_all(1, 0); end
    join
    window_ps = real'(MEAS) * TCLK * 1000.0;
    lo = window_ps / 2500.0;   // 400 MHz
    hi = window_ps / 2000.0;   // 500 MHz
    diffs = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        expected = int'(window_ps * 1000.0 / real'(10 * stage_fs(r, c)));
        check($sformatf("RO (%0d,%0d) count %0d, model %0d", r, c, cnt[0][0][r][c], expected),
              cnt[0][0][r][c] >= expected - 2 && cnt[0][0][r][c] <= expected + 2);
        check("inside 400-500 MHz", real'(cnt[0][0][r][c]) >= lo && real'(cnt[0][0][r][c]) <= hi);
        check("repeatable without noise", cnt[0][1][r][c] - cnt[0][0][r][c] <= 1 &&
                                          cnt[0][0][r][c] - cnt[0][1][r][c] <= 1);
        // +-3 ps on a ~1.1 ns half period: about +-0.3 %
        check("noisy count near nominal", cnt[1][0][r][c] - cnt[0][0][r][c] <= expected / 300 + 2 &&
                                          cnt[0][0][r][c] - cnt[1][0][r][c] <= expected / 300 + 2);
        if (cnt[1][0][r][c] != cnt[0][0][r][c]) diffs++;
      end
    check("noise visible", diffs > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
