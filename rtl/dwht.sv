// dwht -- 16 x 16 two-dimensional discrete Walsh-Hadamard transform engine,
// computed in place without multipliers.
//
// Datapath (one instance each): a data RAM holding the 256 array elements at
// 20 bits; an index ROM whose words list the four RAM addresses of one
// butterfly; an address MUX choosing the RAM address among the four ROM
// address fields and the controller's own sequential address; a register
// bank of four registers that collects the four RAM words of a butterfly; the
// 4P-2D DWHT butterfly; a data MUX choosing the RAM write data among the four
// butterfly outputs and the input stream; and the control FSM.
//
// Operation, one transform:
//  1. LOAD   256 words are taken from the input stream (shrink_in) and
//            written to RAM addresses 0..255, sign-extended to 20 bits
//            (row-major order: element (r,c) is word 16r+c).
//  2. For each of the 256 ROM words: fetch the word (1 cycle), read the
//     four addressed RAM words into the register bank (5 cycles, the RAM has
//     a registered output), then write the four butterfly outputs back to
//     the same four addresses (4 cycles): 10 cycles per butterfly.
//  3. UNLOAD the 256 coefficients in address order on m_axis, sign-extended
//     to 32 bits, tlast on the last; 2 cycles per coefficient when the
//     receiver is always ready.
// Total about 256 + 2560 + 512 = 3330 cycles, 62 us at 54 MHz (the reference
// design reports 66 us).  Coefficient (u,v) is at word 16u+v, in natural
// (Hadamard) order, and equals (1/16) sum_{r,c} x(r,c) (-1)^(u.r + v.c), up to
// the rounding of the four halvings; coefficient 0 is the DC term.
//
// Input words are taken as 16-bit signed numbers, as in the reference design.
// RO counts between 32768 and 65535 therefore all read as count - 65536; the
// common offset only changes the DC coefficient, which is never used.
//
// Stream ports follow AXI4-Stream (tvalid/tready handshake); input tlast is
// not needed because the frame length is fixed.  The block structure and the
// load / fetch / butterfly / write-back / unload sequence are the reference
// design's; the cycle-level schedule is this implementation's.
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// only because the handshake assertion is disabled during reset; every
// flip-flop resets asynchronously.  Input tlast is not used: a frame is always
// 256 words.
module dwht
  import puf_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // AXI4-Stream in: RO counter values
  input  logic [IN_TDATA_W-1:0]   shrink_in_tdata,
  input  logic                    shrink_in_tvalid,
  output logic                    shrink_in_tready,
  input  logic                    shrink_in_tlast,
  // AXI4-Stream out: transform coefficients
  output logic [COEF_TDATA_W-1:0] m_axis_tdata,
  output logic                    m_axis_tvalid,
  input  logic                    m_axis_tready,
  output logic                    m_axis_tlast
);
  timeunit 1ns; timeprecision 1ps;

  typedef enum logic [2:0] {
    S_LOAD, S_FETCH, S_READ, S_WRITE, S_OUT_RD, S_OUT_SEND
  } state_t;

  state_t      state;
  logic [8:0]  cnt;       // load / unload counter, 0..256
  logic [8:0]  word;      // ROM word counter, 0..256
  logic [2:0]  k;         // port index within a butterfly, 0..4

  // control signals of Fig.-style datapath
  logic              rom_en;
  logic [31:0]       rom_data;
  logic [2:0]        addr_sel;   // 0..3: ROM field, 4: controller address
  logic [2:0]        data_sel;   // 0..3: butterfly output, 4: stream input
  logic              ram_en, ram_we;
  logic [7:0]        ram_addr;
  logic [DATA_W-1:0] ram_wdata, ram_rdata;
  logic signed [DATA_W-1:0] regs [4];
  logic signed [DATA_W-1:0] y [4];
  logic [7:0]        fsm_addr;

  dwht_index_rom u_rom (
    .clk, .en(rom_en), .addr(word[7:0]), .data(rom_data)
  );

  dwht_data_ram #(.W(DATA_W), .DEPTH(N_RO)) u_ram (
    .clk, .en(ram_en), .we(ram_we), .addr(ram_addr),
    .wdata(ram_wdata), .rdata(ram_rdata)
  );

  dwht_4p2d #(.W(DATA_W)) u_bfly (.x(regs), .y(y));

  // address MUX
  always_comb begin
    case (addr_sel)
      3'd0:    ram_addr = rom_data[7:0];
      3'd1:    ram_addr = rom_data[15:8];
      3'd2:    ram_addr = rom_data[23:16];
      3'd3:    ram_addr = rom_data[31:24];
      default: ram_addr = fsm_addr;
    endcase
  end

  // data MUX
  always_comb begin
    case (data_sel)
      3'd0:    ram_wdata = y[0];
      3'd1:    ram_wdata = y[1];
      3'd2:    ram_wdata = y[2];
      3'd3:    ram_wdata = y[3];
      default: ram_wdata = DATA_W'($signed(shrink_in_tdata));
    endcase
  end

  // control FSM: combinational outputs
  always_comb begin
    rom_en           = 1'b0;
    ram_en           = 1'b0;
    ram_we           = 1'b0;
    addr_sel         = 3'd4;
    data_sel         = 3'd4;
    fsm_addr         = cnt[7:0];
    shrink_in_tready = 1'b0;
    unique case (state)
      S_LOAD: begin
        shrink_in_tready = 1'b1;
        ram_en           = shrink_in_tvalid;
        ram_we           = 1'b1;
      end
      S_FETCH: rom_en = 1'b1;
      S_READ: begin
        addr_sel = k;
        ram_en   = (k < 3'd4);
      end
      S_WRITE: begin
        addr_sel = k;
        data_sel = k;
        ram_en   = 1'b1;
        ram_we   = 1'b1;
      end
      S_OUT_RD:   ram_en = 1'b1;
      S_OUT_SEND: ;
      default: ;
    endcase
  end

  assign m_axis_tvalid = (state == S_OUT_SEND);
  assign m_axis_tdata  = COEF_TDATA_W'($signed(ram_rdata));
  assign m_axis_tlast  = (state == S_OUT_SEND) && (cnt == 9'd255);

  // control FSM: state and register bank
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      word  <= '0;
      k     <= '0;
    end else begin
      unique case (state)
        S_LOAD:
          if (shrink_in_tvalid) begin
            if (cnt == 9'd255) begin
              cnt   <= '0;
              word  <= '0;
              state <= S_FETCH;
            end else cnt <= cnt + 1'b1;
          end
        S_FETCH: begin
          k     <= '0;
          state <= S_READ;
        end
        S_READ: begin
          if (k != 3'd0) regs[k-1] <= ram_rdata;   // register bank sel/en
          if (k == 3'd4) begin
            k     <= '0;
            state <= S_WRITE;
          end else k <= k + 1'b1;
        end
        S_WRITE: begin
          if (k == 3'd3) begin
            k <= '0;
            if (word == 9'd255) begin
              cnt   <= '0;
              state <= S_OUT_RD;
            end else begin
              word  <= word + 1'b1;
              state <= S_FETCH;
            end
          end else k <= k + 1'b1;
        end
        S_OUT_RD: state <= S_OUT_SEND;
        S_OUT_SEND:
          if (m_axis_tready) begin
            if (cnt == 9'd255) begin
              cnt   <= '0;
              state <= S_LOAD;
            end else begin
              cnt   <= cnt + 1'b1;
              state <= S_OUT_RD;
            end
          end
        default: state <= S_LOAD;
      endcase
    end
  end

  // AXI4-Stream rule: once valid, data stays stable until accepted.
  a_axis_hold : assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));
endmodule
