// bch_decoder -- bounded-minimum-distance decoder of the binary
// BCH(255,131,37) code: it corrects every pattern of up to BCH_T = 18 bit
// errors and flags a failure when it finds the received word is not within
// distance 18 of a codeword it can reach.
//
// Three phases, all sequential:
//  1. Syndromes S_1..S_36, S_j = r(alpha^j), by Horner's rule over the 255
//     received bits, highest degree first: 255 cycles, 36 constant
//     multipliers.
//  2. Error-locator polynomial Lambda(x), degree <= 18, by the inversionless
//     Berlekamp-Massey algorithm: 36 iterations, one per cycle.
//  3. Chien search: bit p is in error when Lambda(alpha^-p) = 0.  The terms
//     Lambda_i alpha^(-i p) are kept in registers and multiplied by the
//     constants alpha^-i every cycle, p = 0..254: 255 cycles.  Erroneous bits
//     are flipped as they are found.
// Decoding fails (fail = 1) when deg Lambda exceeds 18 or the number of roots
// found differs from deg Lambda; the received word is then output unchanged.
//
// Interface: pulse `start` with `rx` valid (sampled at start, rx[i] is the
// coefficient of x^i).  `busy` stays high for 547 cycles, then `done` pulses
// and `corrected`, `msg` (= corrected[254:124]), `n_err` and `fail` hold until
// the next start.  That the decoder is a BMDD for this code is the design's;
// the algorithm choice and schedule are this implementation's.
module bch_decoder
  import bch_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BCH_N-1:0] rx,
  output logic             busy,
  output logic             done,
  output logic [BCH_N-1:0] corrected,
  output logic [BCH_K-1:0] msg,
  output logic [4:0]       n_err,
  output logic             fail
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned NS = 2 * BCH_T;   // number of syndromes
  localparam int unsigned NL = BCH_T + 1;   // Lambda coefficients

  typedef enum logic [2:0] {S_IDLE, S_SYN, S_BM, S_CHIEN, S_DONE} state_t;

  state_t      state;
  logic [7:0]  cnt;
  logic        rbit;
  gf_t         syn   [NS];     // syn[j] = S_(j+1)
  gf_t         lam   [NL];
  gf_t         bpoly [NL];
  gf_t         gamma;
  logic [5:0]  lreg;           // current LFSR length L
  gf_t         delta;
  gf_t         lam_n [NL];
  gf_t         term  [NL];     // Chien terms
  gf_t         csum;
  logic [5:0]  roots;
  logic [BCH_N-1:0] rx_q;     // received word, restored on failure

  assign msg  = corrected[BCH_N-1:BCH_P];
  assign rbit = corrected[8'(BCH_N - 1) - cnt];

  // ---- constant multipliers ----
  gf_t syn_next [NS];
  gf_t term_next [NL];
  for (genvar j = 0; j < NS; j++) begin : g_syn
    localparam gf_t AJ = gf_alpha_pow(j + 1);
    assign syn_next[j] = gf_mul(syn[j], AJ) ^ {7'd0, rbit};
  end
  for (genvar i = 0; i < NL; i++) begin : g_chien
    localparam gf_t AINV = gf_alpha_pow(BCH_N - i);
    assign term_next[i] = gf_mul(term[i], AINV);
  end

  // ---- Berlekamp-Massey step (combinational) ----
  always_comb begin
    delta = '0;
    for (int i = 0; i < NL; i++)
      if (i <= int'(cnt) && int'(cnt) - i < NS)
        delta ^= gf_mul(lam[i], syn[int'(cnt) - i]);
    for (int i = 0; i < NL; i++)
      lam_n[i] = gf_mul(gamma, lam[i]) ^ ((i > 0) ? gf_mul(delta, bpoly[i-1]) : '0);
  end

  always_comb begin
    csum = '0;
    for (int i = 0; i < NL; i++) csum ^= term[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      fail      <= 1'b0;
      n_err     <= '0;
      corrected <= '0;
      rx_q      <= '0;
      gamma     <= '0;
      lreg      <= '0;
      roots     <= '0;
      for (int j = 0; j < NS; j++) syn[j] <= '0;
      for (int i = 0; i < NL; i++) begin
        lam[i] <= '0; bpoly[i] <= '0; term[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:
          if (start) begin
            corrected <= rx;
            rx_q      <= rx;
            busy      <= 1'b1;
            cnt       <= '0;
            for (int j = 0; j < NS; j++) syn[j] <= '0;
            state     <= S_SYN;
          end
        S_SYN: begin
          for (int j = 0; j < NS; j++) syn[j] <= syn_next[j];
          cnt <= cnt + 1'b1;
          if (cnt == 8'(BCH_N - 1)) begin
            cnt   <= '0;
            for (int i = 0; i < NL; i++) begin
              lam[i]   <= (i == 0) ? 8'h01 : 8'h00;
              bpoly[i] <= (i == 0) ? 8'h01 : 8'h00;
            end
            gamma <= 8'h01;
            lreg  <= '0;
            state <= S_BM;
          end
        end
        S_BM: begin
          lam <= lam_n;
          if (delta != '0 && 2 * int'(lreg) <= int'(cnt)) begin
            bpoly <= lam;
            lreg  <= 6'(int'(cnt) + 1 - int'(lreg));
            gamma <= delta;
          end else begin
            bpoly[0] <= '0;
            for (int i = 1; i < NL; i++) bpoly[i] <= bpoly[i-1];
          end
          cnt <= cnt + 1'b1;
          if (cnt == 8'(NS - 1)) begin
            cnt   <= '0;
            state <= S_CHIEN;
            roots <= '0;
            for (int i = 0; i < NL; i++) term[i] <= lam_n[i];
          end
        end
        S_CHIEN: begin
          if (csum == '0) begin
            corrected[cnt] <= ~corrected[cnt];
            roots          <= roots + 1'b1;
          end
          term <= term_next;
          cnt  <= cnt + 1'b1;
          if (cnt == 8'(BCH_N - 1)) state <= S_DONE;
        end
        S_DONE: begin
          // A root count that differs from deg Lambda means more than BCH_T
          // errors: report the failure and give back the received word.
          if (lreg > 6'(BCH_T) || roots != lreg) begin
            fail      <= 1'b1;
            n_err     <= '0;
            corrected <= rx_q;
          end else begin
            fail  <= 1'b0;
            n_err <= 5'(roots);
          end
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
