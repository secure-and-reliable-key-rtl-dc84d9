// tb_ro_puf_top_full -- the end-to-end flow of tb_ro_puf_top with every
// parameter of the system at its default: 16 x 16 ring oscillators counted for
// 100 us (5400 cycles at 54 MHz) per column, so one measurement of the array
// takes 1.6 ms of simulated time.  One complete operation is run: measure,
// transform, quantize (once plainly and once with back-pressure on the output
// streams), enroll a random key, and reconstruct it from the enrolled bits
// with random bit errors standing in for the measurement noise (7, then up to
// 15, then 25 errors, the last of which must be refused).
//
// Checks: the 5400-cycle window of every column, every DWHT coefficient
// against the exact transform (within 7.5 LSB; counts above 32767 are read as
// signed 16-bit values, which changes only the DC coefficient, and this is
// checked for every AC coefficient), every extracted bit, the helper data
// against a reference BCH encoder, the recovered key and error count, and the
// DWHT (66 us +-15 %) and quantizer (14 us +-10 %) frame times.  The same
// mechanism counters as in tb_ro_puf_top must all be non-zero.
module tb_ro_puf_top_full;
  timeunit 1ns; timeprecision 1ps;
  import puf_pkg::*;
  import bch_pkg::*;
  import bch_ref_pkg::*;

  // Counting window of this run (clock cycles) and whether the reconstruction
  // uses a second full measurement of the array.
  localparam int MEAS      = MEAS_CYCLES_DEFAULT;
  localparam bit REMEASURE = 1'b0;
  localparam real TCLK = 18.518;   // 54 MHz
  logic clk = 0, rst_n = 0;
  always #(TCLK / 2) clk = ~clk;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [15:0] d_in_tdata;
  logic        d_in_tvalid, d_in_tready, d_in_tlast;
  logic [31:0] d_out_tdata;
  logic        d_out_tvalid, d_out_tready, d_out_tlast;
  logic [31:0] q_in_tdata;
  logic        q_in_tvalid, q_in_tready, q_in_tlast;
  logic [7:0]  q_out_tdata;
  logic        q_out_tvalid, q_out_tready, q_out_tlast;
  logic             fc_start, fc_reconstruct, fc_busy, fc_done, fc_fail;
  logic [BCH_K-1:0] fc_key_in, fc_key_out;
  logic [BCH_N-1:0] fc_puf_bits, fc_helper_in, fc_helper_out;
  logic [4:0]       fc_n_err;

  ro_puf_top dut (
    .clk, .rst_n,
    .s_axi_ctrl_awaddr(awaddr), .s_axi_ctrl_awvalid(awvalid), .s_axi_ctrl_awready(awready),
    .s_axi_ctrl_wdata(wdata), .s_axi_ctrl_wstrb(wstrb), .s_axi_ctrl_wvalid(wvalid),
    .s_axi_ctrl_wready(wready), .s_axi_ctrl_bresp(bresp), .s_axi_ctrl_bvalid(bvalid),
    .s_axi_ctrl_bready(bready), .s_axi_ctrl_araddr(araddr), .s_axi_ctrl_arvalid(arvalid),
    .s_axi_ctrl_arready(arready), .s_axi_ctrl_rdata(rdata), .s_axi_ctrl_rresp(rresp),
    .s_axi_ctrl_rvalid(rvalid), .s_axi_ctrl_rready(rready),
    .dwht_in_tdata(d_in_tdata), .dwht_in_tvalid(d_in_tvalid), .dwht_in_tready(d_in_tready),
    .dwht_in_tlast(d_in_tlast), .dwht_out_tdata(d_out_tdata), .dwht_out_tvalid(d_out_tvalid),
    .dwht_out_tready(d_out_tready), .dwht_out_tlast(d_out_tlast),
    .quant_in_tdata(q_in_tdata), .quant_in_tvalid(q_in_tvalid), .quant_in_tready(q_in_tready),
    .quant_in_tlast(q_in_tlast), .quant_out_tdata(q_out_tdata), .quant_out_tvalid(q_out_tvalid),
    .quant_out_tready(q_out_tready), .quant_out_tlast(q_out_tlast),
    .fc_start, .fc_reconstruct, .fc_key_in, .fc_puf_bits, .fc_helper_in, .fc_busy, .fc_done,
    .fc_helper_out, .fc_key_out, .fc_n_err, .fc_fail
  );

  int checks = 0, failures = 0;
  // mechanism counters
  int n_col_meas = 0, n_dwht_stall = 0, n_quant_stall = 0, n_dc_dropped = 0;
  int n_enroll = 0, n_recon = 0, n_corrected = 0, n_uncorrectable = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- AXI4-Lite master ----------------
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

  int en_cycles;
  always @(posedge clk) if (|dut.u_ro_array.ro_en) en_cycles++;

  int counts [256];

  task automatic measure();
    logic [31:0] st;
    for (int c = 0; c < COLS; c++) begin
      en_cycles = 0;
      axi_write(8'h00, 32'(c << 8) | 32'h1);
      do axi_read(8'h04, st); while (!st[1]);
      check($sformatf("window %0d cycles", en_cycles), en_cycles == MEAS);
      n_col_meas++;
      $display("column %0d measured at %0t", c, $time);
      $fflush();
      for (int r = 0; r < ROWS; r++) begin
        axi_read(8'(8'h40 + 4 * r), st);
        counts[16*r + c] = int'(st[15:0]);
      end
    end
  endtask

  // ---------------- streams ----------------
  bit bp;
  int coefs [256];
  int ncoef;
  bit qbits [255];
  int nbits;

  always @(posedge clk) begin
    if (rst_n) begin
      if (d_out_tvalid && d_out_tready) begin
        coefs[ncoef] = int'($signed(d_out_tdata));
        check("dwht tlast", d_out_tlast == (ncoef == 255));
        ncoef++;
      end
      if (d_out_tvalid && !d_out_tready) n_dwht_stall++;
      if (q_out_tvalid && q_out_tready) begin
        if (nbits < 255) qbits[nbits] = q_out_tdata[0];
        check("quantizer tlast", q_out_tlast == (nbits == 254));
        nbits++;
      end
      if (q_out_tvalid && !q_out_tready) n_quant_stall++;
      d_out_tready <= bp ? ($urandom % 3 != 0) : 1'b1;
      q_out_tready <= bp ? ($urandom % 3 != 0) : 1'b1;
    end
  end

  function automatic int popc4(int v);
    return (v & 1) + ((v >> 1) & 1) + ((v >> 2) & 1) + ((v >> 3) & 1);
  endfunction

  task automatic transform(output int cycles);
    longint e16, e16u;
    int t = 0, s;
    ncoef = 0;
    fork
      begin
        for (int i = 0; i < 256; i++) begin
          d_in_tdata  <= 16'(counts[i]);
          d_in_tvalid <= 1'b1;
          d_in_tlast  <= (i == 255);
          @(posedge clk);
          while (!d_in_tready) @(posedge clk);
        end
        d_in_tvalid <= 1'b0;
        d_in_tlast  <= 1'b0;
      end
      while (ncoef < 256) begin @(posedge clk); t++; end
    join
    cycles = t;
    for (int u = 0; u < 16; u++)
      for (int v = 0; v < 16; v++) begin
        e16 = 0; e16u = 0;
        for (int i = 0; i < 256; i++) begin
          s = ((popc4(u & (i / 16)) + popc4(v & (i % 16))) % 2 == 0) ? 1 : -1;
          e16  += s * longint'($signed(16'(counts[i])));   // 16-bit signed view
          e16u += s * longint'(counts[i]);                   // true counts
        end
        checks++;
        if (16 * longint'(coefs[16*u+v]) - e16 > 120 || e16 - 16 * longint'(coefs[16*u+v]) > 120) begin
          failures++;
          if (failures < 15) $display("FAIL coef (%0d,%0d) got %0d exact %0d/16", u, v, coefs[16*u+v], e16);
        end
        if (u != 0 || v != 0) check("AC coefficient independent of the signed view", e16 == e16u);
      end
  endtask

  task automatic quantize(output logic [BCH_N-1:0] x, output int cycles);
    int t = 0;
    nbits = 0;
    fork
      begin
        for (int i = 0; i < 256; i++) begin
          q_in_tdata  <= 32'(coefs[i]);
          q_in_tvalid <= 1'b1;
          q_in_tlast  <= (i == 255);
          @(posedge clk);
          while (!q_in_tready) @(posedge clk);
        end
        q_in_tvalid <= 1'b0;
        q_in_tlast  <= 1'b0;
      end
      while (nbits < 255) begin @(posedge clk); t++; end
    join
    repeat (4) @(posedge clk);
    cycles = t;
    check($sformatf("255 bits per frame (%0d)", nbits), nbits == 255);
    if (nbits == 255) n_dc_dropped++;
    for (int i = 0; i < 255; i++) begin
      x[i] = qbits[i];
      check("bit = coefficient > 0", qbits[i] == (coefs[i+1] > 0));
    end
  endtask

  task automatic extract(bit do_measure, bit backpressure, output logic [BCH_N-1:0] x);
    int cd, cq;
    longint t0;
    t0 = longint'($time);
    if (do_measure) begin
      measure();
      $display("measurement of 16 columns: %0d us", (longint'($time) - t0) / 1000);
      check("16 columns take 16 windows", (longint'($time) - t0) >= longint'(16.0 * MEAS * TCLK));
    end
    bp = backpressure;
    transform(cd);
    quantize(x, cq);
    $display("DWHT frame %0d cycles, quantizer frame %0d cycles", cd, cq);
    if (!backpressure) begin
      check("DWHT frame time", cd >= 3029 && cd <= 4099);
      check("quantizer frame time", cq >= 680 && cq <= 832);
    end
  endtask

  task automatic fc_run(bit rec, logic [BCH_K-1:0] k, logic [BCH_N-1:0] bits, logic [BCH_N-1:0] m);
    fc_reconstruct <= rec;
    fc_key_in      <= k;
    fc_puf_bits    <= bits;
    fc_helper_in   <= m;
    fc_start       <= 1'b1;
    @(posedge clk);
    fc_start <= 1'b0;
    do @(posedge clk); while (!fc_done);
    if (rec) n_recon++; else n_enroll++;
    @(negedge clk);
  endtask

  function automatic int popcount(logic [BCH_N-1:0] v);
    int n = 0;
    for (int i = 0; i < BCH_N; i++) n += v[i];
    return n;
  endfunction

  initial begin
    logic [BCH_N-1:0] x, y, m, extra;
    logic [BCH_K-1:0] key;
    int ne, ones;
    gf_init();
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    wdata = 0; wstrb = 0;
    d_in_tdata = 0; d_in_tvalid = 0; d_in_tlast = 0;
    q_in_tdata = 0; q_in_tvalid = 0; q_in_tlast = 0;
    d_out_tready = 1; q_out_tready = 1; bp = 0; ncoef = 0; nbits = 0;
    fc_start = 0; fc_reconstruct = 0; fc_key_in = '0; fc_puf_bits = '0; fc_helper_in = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // enrollment
    extract(1'b1, 1'b0, x);
    // the same counts once more, with back-pressure on both output streams
    extract(1'b0, 1'b1, y);
    check("identical bits under back-pressure", y == x);
    ones = popcount(x);
    $display("enrollment bits: %0d ones of 255", ones);
    check("extracted bits are balanced", ones > 90 && ones < 165);
    key = rand_msg();
    fc_run(1'b0, key, x, '0);
    m = fc_helper_out;
    check("helper = X xor Enc(key)", m == (x ^ ref_encode(key)));

    // reconstruction from a fresh, noisy measurement; without a second
    // measurement, a few random bit errors stand in for the noise
    if (REMEASURE) extract(1'b1, 1'b0, y);
    else y = x ^ rand_errors(7);
    ne = popcount(x ^ y);
    $display("reconstruction: %0d of 255 bits differ from enrollment", ne);
    fc_run(1'b1, '0, y, m);
    if (ne <= BCH_T) begin
      check("key recovered", fc_key_out == key && !fc_fail);
      check("errors counted", int'(fc_n_err) == ne);
      if (ne > 0) n_corrected++;
    end
    // add bit errors up to 15 in all
    extra = rand_errors(15) & ~(x ^ y);
    while (popcount((x ^ y) | extra) > 15) extra &= extra - 1;
    fc_run(1'b1, '0, y ^ extra, m);
    ne = popcount(x ^ y ^ extra);
    check($sformatf("key recovered with %0d errors", ne), ne > BCH_T || (fc_key_out == key && !fc_fail));
    if (ne <= BCH_T && ne > 0 && int'(fc_n_err) == ne) n_corrected++;
    // too many errors
    fc_run(1'b1, '0, x ^ rand_errors(25), m);
    check("25 errors not silently accepted", fc_fail || fc_key_out != key);
    n_uncorrectable++;

    check("column measurements", n_col_meas == (REMEASURE ? 32 : 16));
    check("DWHT back-pressure occurred", n_dwht_stall > 0);
    check("quantizer back-pressure occurred", n_quant_stall > 0);
    check("DC coefficient dropped", n_dc_dropped == (REMEASURE ? 3 : 2));
    check("enrollment occurred", n_enroll == 1);
    check("reconstruction occurred", n_recon == 3);
    check("bit errors corrected", n_corrected > 0);
    check("decoding failure exercised", n_uncorrectable > 0);
    $display("mechanisms: columns=%0d dwht_stalls=%0d quant_stalls=%0d dc_dropped=%0d enroll=%0d reconstruct=%0d corrected=%0d uncorrectable=%0d",
             n_col_meas, n_dwht_stall, n_quant_stall, n_dc_dropped, n_enroll, n_recon, n_corrected, n_uncorrectable);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
