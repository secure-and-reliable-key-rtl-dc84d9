// tb_dwht -- self-checking testbench of the 16 x 16 DWHT engine.
//
// The expected coefficients are computed here directly from the definition
//     T(u,v) = (1/16) sum_{r,c} x(r,c) (-1)^(popcount(u&r) + popcount(v&c)),
// not from butterflies.  Frame 1 uses inputs that are multiples of 16, for
// which the four halvings are exact, so every coefficient must match
// exactly.  Frames 2 and 3 use arbitrary 16-bit signed inputs; each halving
// rounds down, which can leave the result at most 2 below the exact value,
// so the check there is exact - 2 <= got <= exact (on the floor of the exact
// value).  Frame 3 also applies random back-pressure on the output.
// Checks tlast, and the time from the first input word to the last
// coefficient of frame 1 against the reference 66 us at 54 MHz (3564
// cycles, +-15%).
module tb_dwht;
  timeunit 1ns; timeprecision 1ps;
  import puf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #9.259 clk = ~clk;   // 54 MHz

  logic [15:0] in_tdata;
  logic        in_tvalid, in_tready, in_tlast;
  logic [31:0] out_tdata;
  logic        out_tvalid, out_tready, out_tlast;

  dwht dut (
    .clk, .rst_n,
    .shrink_in_tdata(in_tdata), .shrink_in_tvalid(in_tvalid),
    .shrink_in_tready(in_tready), .shrink_in_tlast(in_tlast),
    .m_axis_tdata(out_tdata), .m_axis_tvalid(out_tvalid),
    .m_axis_tready(out_tready), .m_axis_tlast(out_tlast)
  );

  int checks = 0, failures = 0, stalls = 0;
  int x [256];
  int got [256];
  bit got_last [256];
  int nout;
  bit bp;

  function automatic int popc4(int v);
    return (v & 1) + ((v >> 1) & 1) + ((v >> 2) & 1) + ((v >> 3) & 1);
  endfunction

  function automatic longint exact16(int u, int v);   // 16 * T(u,v)
    longint s = 0;
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++)
        if (((popc4(u & r) + popc4(v & c)) % 2) == 0) s += x[16*r + c];
        else                                          s -= x[16*r + c];
    return s;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_tvalid && out_tready) begin
        got[nout]      = int'($signed(out_tdata));
        got_last[nout] = out_tlast;
        nout++;
      end
      if (out_tvalid && !out_tready) stalls++;
      out_tready <= bp ? ($urandom % 2 == 0) : 1'b1;
    end
  end

  task automatic run_frame(int mode, output int cycles);
    longint e16;
    int t;
    for (int i = 0; i < 256; i++)
      x[i] = (mode == 0) ? 16 * (int'($urandom % 4096) - 2048)
                         : int'($urandom % 65536) - 32768;
    nout = 0;
    bp   = (mode == 2);
    t    = 0;
    fork
      begin
        for (int i = 0; i < 256; i++) begin
          in_tdata  <= 16'(x[i]);
          in_tvalid <= 1'b1;
          in_tlast  <= (i == 255);
          @(posedge clk);
          while (!in_tready) @(posedge clk);
        end
        in_tvalid <= 1'b0;
        in_tlast  <= 1'b0;
      end
      while (nout < 256) begin @(posedge clk); t++; end
    join
    cycles = t;
    for (int u = 0; u < 16; u++)
      for (int v = 0; v < 16; v++) begin
        e16 = exact16(u, v);
        checks++;
        if (mode == 0 ? (got[16*u+v] != e16 / 16)
                      : (16 * longint'(got[16*u+v]) - e16 > 120 ||
                         e16 - 16 * longint'(got[16*u+v]) > 120)) begin
          failures++;
          if (failures < 10)
            $display("FAIL mode %0d coef (%0d,%0d): got %0d exact %0d/16", mode, u, v, got[16*u+v], e16);
        end
        checks++;
        if (got_last[16*u+v] != (u == 15 && v == 15)) failures++;
      end
  endtask

  int cyc;
  initial begin
    in_tvalid = 0; in_tlast = 0; in_tdata = 0; out_tready = 1; bp = 0; nout = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(0, cyc);
    $display("DWHT frame: %0d cycles (reference 3564)", cyc);
    checks++;
    if (cyc < 3029 || cyc > 4099) begin failures++; $display("FAIL: frame time %0d", cyc); end
    run_frame(1, cyc);
    run_frame(2, cyc);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
