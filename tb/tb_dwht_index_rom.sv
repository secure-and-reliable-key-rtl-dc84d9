// tb_dwht_index_rom -- self-checking testbench of the DWHT index ROM.
//
// Reads all 256 words and checks, from the pass structure rather than from
// the ROM's formula, that: in pass p every word addresses a 2 x 2 block whose
// four elements differ pairwise only in row bit p and/or column bit p, in
// the order (r,c), (r,c+2^p), (r+2^p,c), (r+2^p,c+2^p); and that within each
// pass every one of the 256 RAM addresses is used exactly once.  Also checks
// the one-cycle read latency and that the output holds while en is low.
module tb_dwht_index_rom;
  timeunit 1ns; timeprecision 1ps;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        en;
  logic [7:0]  addr;
  logic [31:0] data;

  dwht_index_rom dut (.clk, .en, .addr, .data);

  int checks = 0, failures = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int used [256];
    int p, a0, a1, a2, a3, d;
    en = 0; addr = 0;
    @(posedge clk);
    for (int w = 0; w < 256; w++) begin
      if (w % 64 == 0) foreach (used[i]) used[i] = 0;
      p = w / 64;
      d = 1 << p;
      en <= 1'b1; addr <= 8'(w);
      @(posedge clk);
      en <= 1'b0;
      @(posedge clk);
      #1;
      a0 = int'(data[7:0]); a1 = int'(data[15:8]); a2 = int'(data[23:16]); a3 = int'(data[31:24]);
      check($sformatf("word %0d: base has bit %0d clear", w, p), ((a0 >> 4) & d) == 0 && ((a0 & 15) & d) == 0);
      check($sformatf("word %0d: addr1", w), a1 == a0 + d);
      check($sformatf("word %0d: addr2", w), a2 == a0 + 16 * d);
      check($sformatf("word %0d: addr3", w), a3 == a0 + 17 * d);
      used[a0]++; used[a1]++; used[a2]++; used[a3]++;
      if (w % 64 == 63)
        for (int i = 0; i < 256; i++) check($sformatf("pass %0d uses address %0d once", p, i), used[i] == 1);
      // output holds while en is low
      addr <= 8'(w + 1);
      @(posedge clk);
      #1;
      check("hold while disabled", int'(data[7:0]) == a0);
    end
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
