// dwht_index_rom -- the index ROM of the DWHT engine: one 32-bit word per
// 4P-2D butterfly evaluation, holding the four 8-bit data-RAM addresses of
// the butterfly's inputs (address k in bits 8k+7..8k).
//
// A 16 x 16 2D Walsh-Hadamard transform is four passes of 2 x 2 butterflies.
// Pass p (ROM word bits 7:6) combines elements whose row and column indices
// differ only in bit p; the 64 butterflies of a pass (word bits 5:0 = j) take
// the element at row r0 = j[5:3] and column c0 = j[2:0] with a zero inserted
// at bit position p in each, and
//     addr0 = (r0, c0)   addr1 = (r0, c0 + 2^p)
//     addr2 = (r0 + 2^p, c0)   addr3 = (r0 + 2^p, c0 + 2^p)
// with address = 16*row + col (row-major).  The contents are computed from
// this rule when the ROM is elaborated, so no table file is needed.
// 256 words x 32 bits = 1 KiB, matching the reference design's ROM; the word
// format (four 8-bit addresses) is the reference design's, the visiting
// order is this implementation's extension of the 8 x 8 input-selection
// scheme the reference design builds on.
//
// Synchronous read: `data` is valid the cycle after `en` with `addr`.
module dwht_index_rom (
  input  logic        clk,
  input  logic        en,
  input  logic [7:0]  addr,
  output logic [31:0] data
);
  timeunit 1ns; timeprecision 1ps;

  function automatic logic [3:0] insert_zero(logic [2:0] v, int unsigned p);
    logic [3:0] lo, hi;
    lo = 4'(v) & 4'((1 << p) - 1);
    hi = (4'(v) >> p) << (p + 1);
    return hi | lo;
  endfunction

  function automatic logic [31:0] index_word(int unsigned w);
    int unsigned p;
    logic [3:0]  r0, c0, r1, c1;
    logic [5:0]  j;
    p  = w / 64;
    j  = 6'(w % 64);
    r0 = insert_zero(j[5:3], p);
    c0 = insert_zero(j[2:0], p);
    r1 = r0 | 4'(1 << p);
    c1 = c0 | 4'(1 << p);
    return {r1, c1, r1, c0, r0, c1, r0, c0};
  endfunction


  logic [31:0] rom [256];

  initial begin
    for (int i = 0; i < 256; i++) rom[i] = index_word(i);
  end

  always_ff @(posedge clk) begin
    if (en) data <= rom[addr];
  end
endmodule
