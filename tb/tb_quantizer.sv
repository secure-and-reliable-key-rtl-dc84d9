// tb_quantizer -- self-checking testbench of the one-bit quantizer.
//
// Loads the boundary ROM from tb/quant_boundaries.hex, whose word i is
// ((37*i) mod 201 - 100) * 8 -- the same formula is evaluated here to get the
// expected bits independently of the ROM.  Three frames of 256 coefficients
// are sent: random values near the boundaries, values equal to the boundaries
// (bit must be 0) and boundary+1 (bit must be 1).  The receiver applies
// random back-pressure in frames 2 and 3.  Checks every bit, the tlast
// position, that the DC coefficient produces no bit, and the frame time of
// the first frame against the reference 14 us at 54 MHz (756 cycles, +-10%).
module tb_quantizer;
  timeunit 1ns; timeprecision 1ps;
  import puf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #9.259 clk = ~clk;   // 54 MHz

  logic [31:0] in_tdata;
  logic        in_tvalid, in_tready, in_tlast;
  logic [7:0]  out_tdata;
  logic        out_tvalid, out_tready, out_tlast;

  quantizer #(.BOUNDARY_FILE("tb/quant_boundaries.hex")) dut (
    .clk, .rst_n,
    .shrink_in_tdata(in_tdata), .shrink_in_tvalid(in_tvalid),
    .shrink_in_tready(in_tready), .shrink_in_tlast(in_tlast),
    .m_axis_tdata(out_tdata), .m_axis_tvalid(out_tvalid),
    .m_axis_tready(out_tready), .m_axis_tlast(out_tlast)
  );

  int checks = 0, failures = 0;
  int stalls = 0;

  function automatic int bound(int i);   // boundary of coefficient i (1..255)
    return (((37 * (i - 1)) % 201) - 100) * 8;
  endfunction

  int  coefs [256];
  int  nbits;
  bit  exp_bits [255];
  logic got_bits [255];
  bit  got_last [255];
  int  frame_mode;
  bit  bp;

  task automatic send_frame();
    for (int i = 0; i < 256; i++) begin
      in_tdata  <= 32'(coefs[i]);
      in_tvalid <= 1'b1;
      in_tlast  <= (i == 255);
      @(posedge clk);
      while (!in_tready) @(posedge clk);
    end
    in_tvalid <= 1'b0;
    in_tlast  <= 1'b0;
  endtask

  // receiver
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_tvalid && out_tready) begin
        if (nbits < 255) begin
          got_bits[nbits] = out_tdata[0];
          got_last[nbits] = out_tlast;
        end
        nbits++;
      end
      if (out_tvalid && !out_tready) stalls++;
      out_tready <= bp ? ($urandom % 3 != 0) : 1'b1;
    end
  end

  task automatic run_frame(int mode, bit backpressure, output int cycles);
    int t0;
    for (int i = 0; i < 256; i++) begin
      case (mode)
        0: coefs[i] = int'($urandom % 2001) - 1000;
        1: coefs[i] = (i == 0) ? 5 : bound(i);
        default: coefs[i] = (i == 0) ? -5 : bound(i) + 1;
      endcase
    end
    for (int i = 1; i < 256; i++) exp_bits[i-1] = (coefs[i] > bound(i));
    nbits = 0;
    bp    = backpressure;
    t0 = 0;
    fork
      send_frame();
      begin
        while (nbits < 255) begin @(posedge clk); t0++; end
      end
    join
    cycles = t0;
    repeat (5) @(posedge clk);
    checks++;
    if (nbits != 255) begin failures++; $display("FAIL: %0d bits, expected 255", nbits); end
    for (int i = 0; i < 255; i++) begin
      checks++;
      if (got_bits[i] !== exp_bits[i]) begin
        failures++;
        if (failures < 10) $display("FAIL mode %0d bit %0d: got %0d exp %0d", mode, i, got_bits[i], exp_bits[i]);
      end
      checks++;
      if (got_last[i] != (i == 254)) failures++;
    end
  endtask

  int cyc;
  initial begin
    in_tvalid = 0; in_tlast = 0; in_tdata = 0; out_tready = 1; bp = 0; nbits = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(0, 0, cyc);
    $display("quantizer frame: %0d cycles (reference 756)", cyc);
    checks++;
    if (cyc < 680 || cyc > 832) begin failures++; $display("FAIL: frame time %0d cycles", cyc); end
    run_frame(1, 1, cyc);
    run_frame(2, 1, cyc);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: back-pressure never happened"); end
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
