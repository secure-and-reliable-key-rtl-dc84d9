// bch_encoder -- systematic encoder of the binary BCH(255,131,37) code.
//
// The codeword is c(x) = m(x) x^124 + (m(x) x^124 mod g(x)): the 131 message
// bits occupy codeword bits 254..124 unchanged and the 124 parity bits, the
// remainder of the division by the generator polynomial g(x) (bch_pkg), fill
// bits 123..0.  The remainder is computed bit-serially by the usual division
// LFSR, highest message bit first, one message bit per clock cycle.
//
// Interface: pulse `start` with `msg` valid (msg is sampled at start); `busy`
// is high for BCH_K = 131 cycles, then `done` pulses for one cycle and
// `codeword` holds the result until the next start.
// The code parameters are the design's; the serial architecture is this
// implementation's choice (the smallest circuit for a one-off operation).
module bch_encoder
  import bch_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BCH_K-1:0] msg,
  output logic             busy,
  output logic             done,
  output logic [BCH_N-1:0] codeword
);
  timeunit 1ns; timeprecision 1ps;

  logic [BCH_K-1:0] m_sr;    // message shift register, MSB first
  logic [BCH_K-1:0] m_keep;  // message kept for the systematic part
  logic [BCH_P-1:0] par;
  logic [7:0]       cnt;
  logic             fb;

  assign fb       = m_sr[BCH_K-1] ^ par[BCH_P-1];
  assign codeword = {m_keep, par};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cnt    <= '0;
      par    <= '0;
      m_sr   <= '0;
      m_keep <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        cnt    <= '0;
        par    <= '0;
        m_sr   <= msg;
        m_keep <= msg;
      end else if (busy) begin
        par  <= {par[BCH_P-2:0], 1'b0} ^ (fb ? BCH_GEN[BCH_P-1:0] : '0);
        m_sr <= {m_sr[BCH_K-2:0], 1'b0};
        cnt  <= cnt + 1'b1;
        if (cnt == 8'(BCH_K - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
