// tb_ro_measure -- self-checking testbench of the RO counter/timer block.
//
// A 4 x 4 array of test oscillators with known half periods
// (1000 + 37 r + 11 c ps) is measured column by column through the AXI4-Lite
// port with a 1000-cycle window at 54 MHz.  For each RO the count must equal
// window / period within +-2.  Also checked: STATUS busy/done, the
// MEAS_CYCLES register read-back, that only the selected column is enabled
// and for exactly MEAS_CYCLES clock cycles, and that a second measurement
// with another window scales the counts.
module tb_ro_measure;
  timeunit 1ns; timeprecision 1ps;

  localparam int R = 4, C = 4;
  localparam real TCLK = 18.518;

  logic clk = 0, rst_n = 0;
  always #(TCLK / 2) clk = ~clk;

  logic [C-1:0]   ro_en;
  logic [R*C-1:0] ro_osc;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;

  ro_measure #(.R(R), .C(C), .CW(16), .MEAS_DEFAULT(1000)) dut (
    .clk, .rst_n, .ro_en, .ro_osc,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready)
  );

  function automatic int half_ps(int r, int c);
    return 1000 + 37 * r + 11 * c;
  endfunction

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      initial ro_osc[r*C + c] = 1'b0;
      always begin
        wait (ro_en[c]);
        while (ro_en[c]) begin
          #(half_ps(r, c) * 1ps);
          ro_osc[r*C + c] = ro_en[c] ? ~ro_osc[r*C + c] : 1'b0;
        end
        ro_osc[r*C + c] = 1'b0;
      end
    end
  end

  int checks = 0, failures = 0;
  int en_cycles [C];
  int bad_enable = 0;

  always @(posedge clk) begin
    for (int c = 0; c < C; c++) if (ro_en[c]) en_cycles[c]++;
    if ($countones(ro_en) > 1) bad_enable++;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  task automatic axi_write(logic [7:0] a, logic [31:0] d);
    awaddr <= a; wdata <= d; wstrb <= 4'hf; awvalid <= 1; wvalid <= 1; bready <= 1;
    do @(posedge clk); while (!(awvalid && awready));
    awvalid <= 0; wvalid <= 0;
    do @(posedge clk); while (!bvalid);
    bready <= 0;
    @(negedge clk);
  endtask

  task automatic axi_read(logic [7:0] a, output logic [31:0] d);
    araddr <= a; arvalid <= 1; rready <= 1;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    rready <= 0;
    @(negedge clk);
  endtask

  task automatic measure(int col, int meas);
    logic [31:0] st;
    int expected;
    for (int c = 0; c < C; c++) en_cycles[c] = 0;
    axi_write(8'h08, 32'(meas));
    axi_write(8'h00, 32'(col << 8) | 32'h1);
    axi_read(8'h04, st);
    check("busy after start", st[0] == 1'b1 && st[1] == 1'b0);
    do axi_read(8'h04, st); while (!st[1]);
    check("idle when done", st[0] == 1'b0);
    for (int c = 0; c < C; c++)
      check($sformatf("column %0d enabled %0d cycles", c, en_cycles[c]),
            en_cycles[c] == ((c == col) ? meas : 0));
    for (int r = 0; r < R; r++) begin
      axi_read(8'(8'h40 + 4 * r), st);
      expected = int'(real'(meas) * TCLK * 1000.0 / real'(2 * half_ps(r, col)));
      check($sformatf("count r%0d c%0d = %0d, expected %0d", r, col, st, expected),
            int'(st) >= expected - 2 && int'(st) <= expected + 2);
    end
  endtask

  initial begin
    logic [31:0] d;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    axi_read(8'h08, d);
    check("MEAS_CYCLES reset value", d == 32'd1000);
    for (int c = 0; c < C; c++) measure(c, 1000);
    measure(2, 1700);
    axi_read(8'h00, d);
    check("CTRL read-back of column", d[11:8] == 4'd2);
    check("never two columns enabled", bad_enable == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
