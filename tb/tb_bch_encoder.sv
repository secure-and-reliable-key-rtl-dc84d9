// tb_bch_encoder -- self-checking testbench of the BCH(255,131) encoder.
//
// For a set of messages (all-zero, single 1s, all-ones and random) checks
// that the codeword is systematic (bits 254..124 equal the message), that
// it has r(alpha^j) = 0 for j = 1..36 (the defining property of the code,
// evaluated from GF tables, independent of the generator constant), that it
// equals the reference long-division encoding, and that done comes 132
// cycles after the cycle in which start is sampled.
module tb_bch_encoder;
  timeunit 1ns; timeprecision 1ps;
  import bch_pkg::*;
  import bch_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start, busy, done;
  logic [BCH_K-1:0] msg;
  logic [BCH_N-1:0] codeword;

  bch_encoder dut (.clk, .rst_n, .start, .msg, .busy, .done, .codeword);

  int checks = 0, failures = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic encode(logic [BCH_K-1:0] m);
    int cyc = 0;
    msg   <= m;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    do begin @(posedge clk); cyc++; end while (!done);
    check("latency", cyc == BCH_K + 1);
    check("systematic", codeword[BCH_N-1:BCH_P] == m);
    check("reference encoding", codeword == ref_encode(m));
    check("zero syndromes", is_codeword(codeword));
  endtask

  initial begin
    gf_init();
    start = 0; msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // g(x) has alpha^1..alpha^36 as roots
    check("generator roots", is_codeword(BCH_N'(BCH_GEN)));
    encode('0);
    encode({BCH_K{1'b1}});
    for (int i = 0; i < BCH_K; i += 13) encode(BCH_K'(1) << i);
    for (int i = 0; i < 30; i++) encode(rand_msg());
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
