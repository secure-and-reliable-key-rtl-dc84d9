// tb_dwht_4p2d -- self-checking testbench of the 4-point 2D Walsh-Hadamard
// butterfly.  Applies corner cases (all zero, extremes of the 20-bit range
// scaled so that the result stays representable, single non-zero inputs)
// and random inputs, and compares each output with floor(+-x0+-x1+-x2+-x3)/2
// computed here with 64-bit integers.
module tb_dwht_4p2d;
  timeunit 1ns; timeprecision 1ps;

  localparam int W = 20;
  logic signed [W-1:0] x [4];
  logic signed [W-1:0] y [4];

  dwht_4p2d #(.W(W)) dut (.x(x), .y(y));

  int checks = 0, failures = 0;
  // sign pattern of output k on input i: y0 ++++, y1 +-+-, y2 ++--, y3 +--+
  int sgn [4][4] = '{'{1, 1, 1, 1}, '{1, -1, 1, -1}, '{1, 1, -1, -1}, '{1, -1, -1, 1}};

  function automatic longint floor_half(longint v);
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  task automatic apply(int a, int b, int c, int d);
    longint s;
    x[0] = W'(a); x[1] = W'(b); x[2] = W'(c); x[3] = W'(d);
    #1;
    for (int k = 0; k < 4; k++) begin
      s = sgn[k][0] * longint'(a) + sgn[k][1] * longint'(b)
        + sgn[k][2] * longint'(c) + sgn[k][3] * longint'(d);
      checks++;
      if (longint'(y[k]) != floor_half(s)) begin
        failures++;
        if (failures < 10) $display("FAIL y%0d for %0d %0d %0d %0d: got %0d exp %0d", k, a, b, c, d, y[k], floor_half(s));
      end
    end
  endtask

  initial begin
    int lim;
    lim = (1 << (W - 1)) / 2 - 1;   // |x| <= lim keeps |y| < 2^(W-1)
    apply(0, 0, 0, 0);
    apply(1, 0, 0, 0);
    apply(0, 1, 0, 0);
    apply(0, 0, 1, 0);
    apply(0, 0, 0, 1);
    apply(-1, 0, 0, 0);
    apply(lim, lim, lim, lim);
    apply(-lim, -lim, -lim, -lim);
    apply(lim, -lim, lim, -lim);
    apply(-lim, lim, lim, -lim);
    for (int i = 0; i < 2000; i++)
      apply(int'($urandom % (2 * lim + 1)) - lim, int'($urandom % (2 * lim + 1)) - lim,
            int'($urandom % (2 * lim + 1)) - lim, int'($urandom % (2 * lim + 1)) - lim);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
