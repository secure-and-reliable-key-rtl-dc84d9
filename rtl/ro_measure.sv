// ro_measure -- counters, stop timer and AXI4-Lite register file that measure
// a ROWS x COLS ring-oscillator array one column at a time.
//
// Every row has one CNT_W-bit counter.  All ROs of a row share it: a column
// select routes the output of the RO in the chosen column to the counter's
// clock, so the ROs of a row are measured one after another.  A stop timer in
// the system clock domain enables the chosen column's ROs for MEAS_CYCLES
// clock cycles and then stops them; the counters then hold the number of
// oscillations in that window.  With 16-bit counters and ROs of at most
// 500 MHz a counter overflows after 131 us, so the reference window is 100 us
// (5400 cycles of the 54 MHz clock), and the 16 columns take 1.6 ms.
//
// Sequence of one measurement (system clock):
//   CLEAR  (2 cycles)       counters are cleared asynchronously,
//   COUNT  (MEAS_CYCLES)    ro_en[col] high, the row counters count RO edges,
//   SETTLE (SETTLE_CYCLES)  ROs stopped; counters are given time to come to
//                           rest before software reads them (they are read
//                           across clock domains only while static),
//   then STATUS.done is set.
//
// AXI4-Lite register map (32-bit, byte addresses):
//   0x00 CTRL        write: bit 0 = start, bits 11:8 = column; read: column
//   0x04 STATUS      bit 0 busy, bit 1 done (cleared by the next start)
//   0x08 MEAS_CYCLES length of the counting window in clock cycles (R/W)
//   0x40+4*r COUNT   counter of row r (read only, low CNT_W bits)
// Writes need both address and data valid in the same cycle and are answered
// one cycle later; reads are answered one cycle after the address.
//
// From the reference design: one counter per row shared serially by the row's
// ROs, 16-bit counters, a separate stop counter, the 100 us window and the
// AXI4-Lite control port.  The register map, the clear/settle phases and the
// one-column-per-command protocol (software reads each column's 16 counts
// before starting the next, so no count storage is needed beside the
// counters) are this implementation's choices.
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// only because the bus assertions are disabled during reset; every flip-flop
// resets asynchronously.  The two low address bits are ignored (word access).
module ro_measure
  import puf_pkg::*;
#(
  parameter int unsigned R             = ROWS,
  parameter int unsigned C             = COLS,
  parameter int unsigned CW            = CNT_W,
  parameter int unsigned MEAS_DEFAULT  = MEAS_CYCLES_DEFAULT,
  parameter int unsigned SETTLE_CYCLES = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // ring-oscillator array
  output logic [C-1:0]     ro_en,      // column enables
  input  logic [R*C-1:0]   ro_osc,     // RO outputs, index r*C + c
  // AXI4-Lite slave (s_axi_ctrl)
  input  logic [7:0]       s_axi_awaddr,
  input  logic             s_axi_awvalid,
  output logic             s_axi_awready,
  input  logic [31:0]      s_axi_wdata,
  input  logic [3:0]       s_axi_wstrb,
  input  logic             s_axi_wvalid,
  output logic             s_axi_wready,
  output logic [1:0]       s_axi_bresp,
  output logic             s_axi_bvalid,
  input  logic             s_axi_bready,
  input  logic [7:0]       s_axi_araddr,
  input  logic             s_axi_arvalid,
  output logic             s_axi_arready,
  output logic [31:0]      s_axi_rdata,
  output logic [1:0]       s_axi_rresp,
  output logic             s_axi_rvalid,
  input  logic             s_axi_rready
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned CSEL_W = (C > 1) ? $clog2(C) : 1;

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_COUNT, S_SETTLE} state_t;

  state_t            state;
  logic [CSEL_W-1:0] col;
  logic [31:0]       meas_cycles;
  logic [31:0]       timer;
  logic              done;
  logic              cnt_clr;
  logic              start_req;

  // ---------------------------------------------------------------------
  // Row counters, each clocked by the selected RO of its row.
  // ---------------------------------------------------------------------
  logic [R-1:0]          row_clk;
  logic [R-1:0][CW-1:0]  count;

  for (genvar r = 0; r < R; r++) begin : g_row
    logic [CW-1:0] cnt;
    assign row_clk[r] = ro_osc[r*C + int'(col)];
    always_ff @(posedge row_clk[r] or posedge cnt_clr) begin
      if (cnt_clr) cnt <= '0;
      else         cnt <= cnt + 1'b1;
    end
    assign count[r] = cnt;
  end

  always_comb begin
    ro_en = '0;
    if (state == S_COUNT) ro_en[col] = 1'b1;
  end

  // ---------------------------------------------------------------------
  // Stop timer / sequencer
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      timer   <= '0;
      done    <= 1'b0;
      cnt_clr <= 1'b1;
    end else begin
      case (state)
        S_IDLE: begin
          cnt_clr <= 1'b0;
          if (start_req) begin
            state   <= S_CLEAR;
            done    <= 1'b0;
            cnt_clr <= 1'b1;
            timer   <= '0;
          end
        end
        S_CLEAR: begin
          timer <= timer + 1;
          if (timer == 1) begin
            cnt_clr <= 1'b0;
            timer   <= '0;
            state   <= S_COUNT;
          end
        end
        S_COUNT: begin
          timer <= timer + 1;
          if (timer == meas_cycles - 1) begin
            timer <= '0;
            state <= S_SETTLE;
          end
        end
        S_SETTLE: begin
          timer <= timer + 1;
          if (timer == SETTLE_CYCLES - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // AXI4-Lite slave
  // ---------------------------------------------------------------------
  logic wr_fire;
  assign wr_fire       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_fire;
  assign s_axi_wready  = wr_fire;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign s_axi_arready = !s_axi_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      meas_cycles  <= MEAS_DEFAULT;
      col          <= '0;
      start_req    <= 1'b0;
    end else begin
      start_req <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        case (s_axi_awaddr[7:2])
          6'h00: if (state == S_IDLE && s_axi_wstrb[1] && s_axi_wstrb[0]) begin
            col       <= CSEL_W'(s_axi_wdata[11:8]);
            start_req <= s_axi_wdata[0];
          end
          6'h02: if (state == S_IDLE && (&s_axi_wstrb)) meas_cycles <= s_axi_wdata;
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (s_axi_arvalid && s_axi_arready) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= '0;
        if (s_axi_araddr[7:6] == 2'b01) begin
          if (int'(s_axi_araddr[5:2]) < R)
            s_axi_rdata <= 32'(count[s_axi_araddr[5:2]]);
        end else begin
          case (s_axi_araddr[5:2])
            4'h0: s_axi_rdata <= 32'(col) << 8;
            4'h1: s_axi_rdata <= {30'd0, done, (state != S_IDLE) || start_req};
            4'h2: s_axi_rdata <= meas_cycles;
            default: ;
          endcase
        end
      end
    end
  end

  // AXI4-Lite handshake rules: a response stays valid until accepted.
  a_bvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
endmodule
