// tb_fuzzy_commitment -- self-checking testbench of the fuzzy-commitment key
// binder.
//
// For random keys and random enrollment bits X it enrolls and checks that
// the helper data equals X xor Enc(key) from the reference encoder.  It then
// reconstructs from Y = X xor E with 0..18 random bit errors and checks that
// the key comes back, with n_err = |E| and fail low, and with 25 errors that
// the key is either flagged as failed or (a miscorrection) differs from the
// enrolled one.  Both modes must occur and both latencies are checked
// (enrollment 133 cycles, reconstruction 549 from the start cycle).
module tb_fuzzy_commitment;
  timeunit 1ns; timeprecision 1ps;
  import bch_pkg::*;
  import bch_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start, reconstruct, busy, done, fail;
  logic [BCH_K-1:0] key_in, key_out;
  logic [BCH_N-1:0] puf_bits, helper_in, helper_out;
  logic [4:0]       n_err;

  fuzzy_commitment dut (.clk, .rst_n, .start, .reconstruct, .key_in, .puf_bits,
                        .helper_in, .busy, .done, .helper_out, .key_out, .n_err, .fail);

  int checks = 0, failures = 0, n_enroll = 0, n_recon = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic run(bit rec, logic [BCH_K-1:0] k, logic [BCH_N-1:0] bits,
                     logic [BCH_N-1:0] m, output int cyc);
    cyc = 0;
    reconstruct <= rec;
    key_in      <= k;
    puf_bits    <= bits;
    helper_in   <= m;
    start       <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    do begin @(posedge clk); cyc++; end while (!done);
    if (rec) n_recon++; else n_enroll++;
  endtask

  function automatic logic [BCH_N-1:0] rand_bits();
    logic [BCH_N-1:0] v;
    for (int i = 0; i < BCH_N; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [BCH_K-1:0] key;
    logic [BCH_N-1:0] x, m;
    int cyc;
    gf_init();
    start = 0; reconstruct = 0; key_in = '0; puf_bits = '0; helper_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int rep = 0; rep < 20; rep++) begin
      key = rand_msg();
      x   = rand_bits();
      run(1'b0, key, x, '0, cyc);
      m = helper_out;
      check("helper = X xor Enc(S)", m == (x ^ ref_encode(key)));
      check($sformatf("enroll latency %0d", cyc), cyc == BCH_K + 2);
      for (int ne = rep % 19; ne <= BCH_T; ne += 6) begin
        run(1'b1, '0, x ^ rand_errors(ne), m, cyc);
        check($sformatf("key after %0d errors", ne), key_out == key && !fail);
        check("n_err", int'(n_err) == ne);
        check($sformatf("reconstruct latency %0d", cyc), cyc == 549);
      end
      run(1'b1, '0, x ^ rand_errors(25), m, cyc);
      check("25 errors: failure or different key", fail || key_out != key);
    end
    check("both modes used", n_enroll > 0 && n_recon > 0);
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
