// bch_pkg -- constants and GF(2^8) arithmetic for the binary BCH(255,131,37)
// code that the fuzzy-commitment key binding uses.
//
// The code is the narrow-sense primitive BCH code of length 255 that corrects
// t = 18 errors.  Its generator polynomial g(x) has degree 124 and is the
// least common multiple of the minimal polynomials of alpha^1 .. alpha^36,
// i.e. the product of (x + alpha^e) over every exponent e in the cyclotomic
// cosets {j * 2^s mod 255} of j = 1..36.  alpha is a root of the primitive
// polynomial x^8 + x^4 + x^3 + x^2 + 1.  The code length, dimension and
// correction radius are those of the design; the field polynomial (and with it
// the particular g(x)) is this implementation's choice.
package bch_pkg;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned BCH_N = 255;   // code length
  localparam int unsigned BCH_K = 131;   // code dimension (key length)
  localparam int unsigned BCH_T = 18;    // correctable errors
  localparam int unsigned BCH_P = BCH_N - BCH_K;  // parity bits, deg g(x)
  localparam int unsigned GF_M  = 8;

  typedef logic [GF_M-1:0] gf_t;

  localparam logic [8:0] GF_PRIM = 9'h11d;

  // g(x), bit i = coefficient of x^i (bit 124 is the leading 1).
  localparam logic [BCH_P:0] BCH_GEN = 125'h1_1bcb_6cce_6906_958a_a17f_2231_050e_b39;

  // Multiplication in GF(2^8).
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [GF_M-1:0] acc, x;
    acc = '0;
    x   = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) acc ^= x;
      x = x[7] ? ((x << 1) ^ GF_PRIM[7:0]) : (x << 1);
    end
    return acc;
  endfunction

  // alpha^e for 0 <= e.
  function automatic gf_t gf_alpha_pow(int unsigned e);
    gf_t x;
    x = 8'h01;
    for (int unsigned i = 0; i < (e % BCH_N); i++)
      x = x[7] ? ((x << 1) ^ GF_PRIM[7:0]) : (x << 1);
    return x;
  endfunction
endpackage
