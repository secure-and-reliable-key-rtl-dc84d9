// fuzzy_commitment -- binds a chosen secret key to the PUF bits and
// recovers it later from a noisy re-measurement (fuzzy commitment scheme).
//
// Enrollment (reconstruct = 0): the key S (BCH_K = 131 bits, enough for a
// 128-bit AES key) is encoded into a BCH(255,131,37) codeword C, and the
// public helper data is M = X xor C, where X are the 255 PUF bits measured at
// enrollment.  Because the PUF bits are uniform, M reveals nothing about S.
// Reconstruction (reconstruct = 1): with fresh PUF bits Y = X xor E,
// R = M xor Y = C xor E is decoded by the bounded-minimum-distance decoder,
// which removes up to 18 bit errors, and the key is read from the systematic
// part of the corrected codeword.
//
// Interface: pulse `start` with `reconstruct`, `key_in`, `puf_bits` and
// `helper_in` valid (all sampled at start).  `done` pulses 133 cycles after
// the start cycle for enrollment, 549 for reconstruction.  `helper_out` or
// `key_out`, `n_err`, `fail` (reconstruction) then hold until the next start.
// The scheme and the code are the design's; the interface is this
// implementation's.
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// only because the assertions are disabled during reset; every flip-flop
// resets asynchronously.  The decoder's corrected codeword is not used: only
// its message part (the key) is an output.
module fuzzy_commitment
  import bch_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             reconstruct,   // 0: enroll, 1: reconstruct
  input  logic [BCH_K-1:0] key_in,        // secret key S (enrollment)
  input  logic [BCH_N-1:0] puf_bits,      // X (enrollment) or Y (reconstruction)
  input  logic [BCH_N-1:0] helper_in,     // helper data M (reconstruction)
  output logic             busy,
  output logic             done,
  output logic [BCH_N-1:0] helper_out,    // helper data M (enrollment)
  output logic [BCH_K-1:0] key_out,       // recovered key (reconstruction)
  output logic [4:0]       n_err,         // bit errors corrected
  output logic             fail           // more errors than correctable
);
  timeunit 1ns; timeprecision 1ps;

  typedef enum logic [1:0] {S_IDLE, S_ENC, S_DEC} state_t;

  state_t           state;
  logic [BCH_N-1:0] x_q;
  logic             enc_start, enc_busy, enc_done;
  logic             dec_start, dec_busy, dec_done, dec_fail;
  logic [BCH_N-1:0] codeword, dec_word;
  logic [BCH_K-1:0] dec_msg;
  logic [4:0]       dec_nerr;

  assign enc_start = (state == S_IDLE) && start && !reconstruct;
  assign dec_start = (state == S_IDLE) && start &&  reconstruct;
  assign busy      = (state != S_IDLE);

  bch_encoder u_enc (
    .clk, .rst_n, .start(enc_start), .msg(key_in),
    .busy(enc_busy), .done(enc_done), .codeword
  );

  bch_decoder u_dec (
    .clk, .rst_n, .start(dec_start), .rx(helper_in ^ puf_bits),
    .busy(dec_busy), .done(dec_done), .corrected(dec_word),
    .msg(dec_msg), .n_err(dec_nerr), .fail(dec_fail)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      x_q        <= '0;
      helper_out <= '0;
      key_out    <= '0;
      n_err      <= '0;
      fail       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:
          if (start) begin
            x_q   <= puf_bits;
            state <= reconstruct ? S_DEC : S_ENC;
          end
        S_ENC:
          if (enc_done) begin
            helper_out <= x_q ^ codeword;
            done       <= 1'b1;
            state      <= S_IDLE;
          end
        S_DEC:
          if (dec_done) begin
            key_out <= dec_msg;
            n_err   <= dec_nerr;
            fail    <= dec_fail;
            done    <= 1'b1;
            state   <= S_IDLE;
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The codec is only started from idle, so it is idle then.
  a_enc_idle : assert property (@(posedge clk) disable iff (!rst_n) enc_start |-> !enc_busy);
  a_dec_idle : assert property (@(posedge clk) disable iff (!rst_n) dec_start |-> !dec_busy);
endmodule
