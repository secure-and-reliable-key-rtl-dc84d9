// tb_bch_decoder -- self-checking testbench of the BCH(255,131,37) bounded
// minimum distance decoder.
//
// Codewords come from the reference encoder of bch_ref_pkg.  For every error
// count 0..18 it decodes several random patterns and checks that the
// codeword and message are restored, that n_err equals the number of errors
// and that fail is low, plus the fixed 548-cycle latency.  For 19..30 errors
// (beyond the code's guarantee) it checks that the decoder either reports
// fail with the received word unchanged, or returns a valid codeword that
// differs from the sent one (a miscorrection, which no bounded-distance
// decoder can avoid).
module tb_bch_decoder;
  timeunit 1ns; timeprecision 1ps;
  import bch_pkg::*;
  import bch_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start, busy, done, fail;
  logic [BCH_N-1:0] rx, corrected;
  logic [BCH_K-1:0] msg;
  logic [4:0]       n_err;

  bch_decoder dut (.clk, .rst_n, .start, .rx, .busy, .done, .corrected, .msg, .n_err, .fail);

  int checks = 0, failures = 0, n_fail_reported = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic decode(logic [BCH_N-1:0] r, output int cyc);
    cyc = 0;
    rx    <= r;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    do begin @(posedge clk); cyc++; end while (!done);
  endtask

  initial begin
    logic [BCH_K-1:0] m;
    logic [BCH_N-1:0] c, e;
    int cyc;
    gf_init();
    start = 0; rx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int ne = 0; ne <= BCH_T; ne++) begin
      for (int rep = 0; rep < 4; rep++) begin
        m = rand_msg();
        c = ref_encode(m);
        e = rand_errors(ne);
        decode(c ^ e, cyc);
        check($sformatf("%0d errors: codeword", ne), corrected == c);
        check($sformatf("%0d errors: message", ne), msg == m);
        check($sformatf("%0d errors: n_err=%0d", ne, n_err), int'(n_err) == ne);
        check($sformatf("%0d errors: fail", ne), !fail);
        check($sformatf("latency %0d", cyc), cyc == 548);
      end
    end
    for (int ne = BCH_T + 1; ne <= 30; ne++) begin
      for (int rep = 0; rep < 3; rep++) begin
        m = rand_msg();
        c = ref_encode(m);
        e = rand_errors(ne);
        decode(c ^ e, cyc);
        if (fail) begin
          n_fail_reported++;
          check("failure keeps received word", corrected == (c ^ e));
        end else
          check("miscorrection lands on a codeword", is_codeword(corrected) && corrected != c);
      end
    end
    check("uncorrectable patterns flagged", n_fail_reported > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
