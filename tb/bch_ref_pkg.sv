// bch_ref_pkg -- reference arithmetic for the BCH testbenches, written
// independently of the RTL: GF(2^8) through exponent/logarithm tables,
// syndromes by direct polynomial evaluation, and systematic encoding by
// long division of m(x) x^124 by g(x).
package bch_ref_pkg;
  timeunit 1ns; timeprecision 1ps;
  import bch_pkg::BCH_N, bch_pkg::BCH_K, bch_pkg::BCH_P, bch_pkg::BCH_GEN;

  int gf_exp [510];
  int gf_log [256];

  function automatic void gf_init();
    int v = 1;
    for (int i = 0; i < 255; i++) begin
      gf_exp[i] = v;
      gf_log[v] = i;
      v = v << 1;
      if (v & 256) v = v ^ 'h11d;
    end
    for (int i = 255; i < 510; i++) gf_exp[i] = gf_exp[i-255];
  endfunction

  function automatic int ref_mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return gf_exp[gf_log[a] + gf_log[b]];
  endfunction

  // S_j = r(alpha^j), summed term by term.
  function automatic int ref_syndrome(logic [BCH_N-1:0] r, int j);
    int s = 0;
    for (int i = 0; i < BCH_N; i++)
      if (r[i]) s ^= gf_exp[(i * j) % 255];
    return s;
  endfunction

  function automatic bit is_codeword(logic [BCH_N-1:0] r);
    for (int j = 1; j <= 36; j++)
      if (ref_syndrome(r, j) != 0) return 0;
    return 1;
  endfunction

  function automatic logic [BCH_N-1:0] ref_encode(logic [BCH_K-1:0] m);
    logic [BCH_N-1:0] r;
    r = {m, {BCH_P{1'b0}}};
    for (int i = BCH_N - 1; i >= BCH_P; i--)
      if (r[i]) r[i -: (BCH_P + 1)] = r[i -: (BCH_P + 1)] ^ BCH_GEN;
    return {m, r[BCH_P-1:0]};
  endfunction

  function automatic logic [BCH_K-1:0] rand_msg();
    logic [BCH_K-1:0] m;
    for (int i = 0; i < BCH_K; i += 32) m[i +: 32] = $urandom;
    return m;
  endfunction

  // Flip `n` distinct random bits.
  function automatic logic [BCH_N-1:0] rand_errors(int n);
    logic [BCH_N-1:0] e = '0;
    int k = 0;
    while (k < n) begin
      int p = $urandom % BCH_N;
      if (!e[p]) begin e[p] = 1'b1; k++; end
    end
    return e;
  endfunction
endpackage
