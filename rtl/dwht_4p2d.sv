// dwht_4p2d -- the 4-point two-dimensional Walsh-Hadamard butterfly.
//
// Treating the four inputs as a 2 x 2 block [x0 x1; x2 x3] (x1 to the right
// of x0, x2 below it), it computes the 2 x 2 2D Walsh-Hadamard transform,
// scaled by 1/2 so that the transform is orthonormal:
//     y0 = (x0 + x1 + x2 + x3) / 2      y1 = (x0 - x1 + x2 - x3) / 2
//     y2 = (x0 + x1 - x2 - x3) / 2      y3 = (x0 - x1 - x2 + x3) / 2
// No multiplier is needed: the sums are formed W+2 bits wide and the halving
// is an arithmetic shift right by one (rounding toward minus infinity), after
// which the result fits W+1 bits; it is truncated to W bits, which the caller
// guarantees is enough (in the 16 x 16 transform each of the four passes adds
// one net bit to 16-bit inputs, so W = 20).
// Purely combinational.  The equations are the reference design's; the
// rounding of the halving is this implementation's choice.
module dwht_4p2d #(
  parameter int unsigned W = 20
) (
  input  logic signed [W-1:0] x [4],
  output logic signed [W-1:0] y [4]
);
  timeunit 1ns; timeprecision 1ps;

  logic signed [W+1:0] a0, a1, a2, a3;   // sign-extended inputs
  logic signed [W+1:0] s01, d01, s23, d23;
  logic signed [W+1:0] t [4];

  always_comb begin
    a0  = (W+2)'(x[0]);
    a1  = (W+2)'(x[1]);
    a2  = (W+2)'(x[2]);
    a3  = (W+2)'(x[3]);
    s01 = a0 + a1;
    d01 = a0 - a1;
    s23 = a2 + a3;
    d23 = a2 - a3;
    t[0] = s01 + s23;
    t[1] = d01 + d23;
    t[2] = s01 - s23;
    t[3] = d01 - d23;
    for (int i = 0; i < 4; i++) y[i] = W'(t[i] >>> 1);
  end
endmodule
