// quantizer -- one-bit scalar quantizer of the transform coefficients.
//
// Takes the 256 coefficients of one transform from the shrink_in stream, in
// the DWHT's output order.  The first (DC) coefficient is consumed and
// dropped: it is the scaled mean of the array, which an attacker can guess and
// which temperature and supply voltage move most.  Each of the other 255 is
// compared with its own boundary from the boundary ROM; the extracted bit is
// 1 if the coefficient is greater than the boundary and 0 otherwise.  The
// bits leave on m_axis one per beat in tdata bit 0, in coefficient order,
// tlast on the 255th.  With one bit per coefficient the Gray mapping of the
// bit assignment and the histogram equalization are both the identity, so
// neither has hardware here.
//
// Per coefficient: accept (1 cycle, also reads the ROM), compare (1 cycle),
// present the bit (1 cycle if the receiver is ready): 3 cycles, 766 cycles
// per transform, 14.2 us at 54 MHz (the reference design reports 14 us).
//
// The comparison rule, one boundary per coefficient in a ROM, the dropped DC
// coefficient and the AXI stream ports are the reference design's; the bit
// packing on the output stream and the schedule are this implementation's.
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// only because the handshake assertion is disabled during reset; every
// flip-flop resets asynchronously.  Input tlast and the upper 12 bits of the
// 32-bit input word (sign extension of the 20-bit coefficient) are not used.
module quantizer
  import puf_pkg::*;
#(
  parameter string BOUNDARY_FILE = ""
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [COEF_TDATA_W-1:0] shrink_in_tdata,
  input  logic                    shrink_in_tvalid,
  output logic                    shrink_in_tready,
  input  logic                    shrink_in_tlast,
  output logic [BIT_TDATA_W-1:0]  m_axis_tdata,
  output logic                    m_axis_tvalid,
  input  logic                    m_axis_tready,
  output logic                    m_axis_tlast
);
  timeunit 1ns; timeprecision 1ps;

  typedef enum logic [1:0] {S_IN, S_CMP, S_OUT} state_t;

  state_t                   state;
  logic [7:0]               idx;       // coefficient index 0..255
  logic signed [DATA_W-1:0] coef;
  logic signed [DATA_W-1:0] bound;
  logic                     bit_q;
  logic                     rom_en;

  quant_boundary_rom #(.W(DATA_W), .DEPTH(N_BITS), .INIT_FILE(BOUNDARY_FILE)) u_rom (
    .clk, .en(rom_en), .addr(idx - 8'd1), .data(bound)
  );

  assign shrink_in_tready = (state == S_IN);
  assign rom_en           = (state == S_IN) && shrink_in_tvalid && (idx != 8'd0);
  assign m_axis_tvalid    = (state == S_OUT);
  assign m_axis_tdata     = BIT_TDATA_W'(bit_q);
  assign m_axis_tlast     = (state == S_OUT) && (idx == 8'd255);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN;
      idx   <= '0;
      coef  <= '0;
      bit_q <= 1'b0;
    end else begin
      unique case (state)
        S_IN:
          if (shrink_in_tvalid) begin
            coef <= DATA_W'(shrink_in_tdata);
            if (idx == 8'd0) idx   <= 8'd1;        // DC coefficient: dropped
            else             state <= S_CMP;
          end
        S_CMP: begin
          bit_q <= (coef > bound);
          state <= S_OUT;
        end
        S_OUT:
          if (m_axis_tready) begin
            idx   <= idx + 8'd1;                   // wraps to 0 after 255
            state <= S_IN;
          end
        default: state <= S_IN;
      endcase
    end
  end

  a_axis_hold : assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));
endmodule
