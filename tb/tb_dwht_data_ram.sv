// tb_dwht_data_ram -- self-checking testbench of the DWHT data RAM.
// Writes random 20-bit words to all 256 addresses, reads them back in a
// different order against a testbench copy, checks the one-cycle read
// latency, that a disabled cycle neither writes nor changes the output, and
// that a write does not change the output.
module tb_dwht_data_ram;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        en, we;
  logic [7:0]  addr;
  logic [19:0] wdata, rdata;

  dwht_data_ram #(.W(20), .DEPTH(256)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  int checks = 0, failures = 0;
  logic [19:0] model [256];

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic write(int a, logic [19:0] d);
    en <= 1; we <= 1; addr <= 8'(a); wdata <= d;
    @(posedge clk);
    en <= 0; we <= 0;
    model[a] = d;
    @(negedge clk);
  endtask

  task automatic read(int a, output logic [19:0] d);
    en <= 1; we <= 0; addr <= 8'(a);
    @(posedge clk);
    en <= 0;
    @(negedge clk);
    d = rdata;
  endtask

  initial begin
    logic [19:0] d, last;
    en = 0; we = 0; addr = 0; wdata = 0;
    @(posedge clk);
    for (int a = 0; a < 256; a++) write(a, 20'($urandom));
    for (int a = 0; a < 256; a++) begin
      read((a * 97) % 256, d);
      check($sformatf("read %0d got %h exp %h", (a * 97) % 256, d, model[(a * 97) % 256]), d == model[(a * 97) % 256]);
    end
    last = d;
    // disabled cycle with we high: no write, output unchanged
    en <= 0; we <= 1; addr <= 8'd5; wdata <= ~model[5];
    @(posedge clk);
    we <= 0;
    #1 check("no write while disabled", rdata == last);
    read(5, d);
    check("address 5 kept", d == model[5]);
    // a write does not disturb the read register
    write(7, 20'h12345);
    #1 check("write keeps read output", rdata == model[5]);
    read(7, d);
    check("write then read", d == 20'h12345);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
