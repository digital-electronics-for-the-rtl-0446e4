// uc_regs: register bank seen by the control-board microcontroller.
//
// The microcontroller sees the FPGA as an external memory of 32768 16-bit
// words on an asynchronous bus (address, data, CS#, WE#, OE#). Only the
// registers in use are decoded; everything else reads as zero. Functions are
// started by writing their parameters and then a 1 to the matching bit of
// REG_CTRL (a one-cycle execution pulse); status bits report the result.
// Map (word addresses, see amiga_pkg): CTRL, STATUS, POST_T1 (MC T1 bin,
// samples after T1, reset 1536), DELAY (cable delay compensation, samples,
// reset 0), T3 LTS low/high, T3 position, stored events, last received LTS
// and dropped T1s (debug), TEST (bit 0 switches the front end to the
// internal test-pattern generator, reset 0), the 80-entry DAC table at 0x0010, the latched
// calibration counters at 0x0100 (two words per channel, low first) and the
// latched time at 0x0180 (four words), and the recalled event in the T3
// buffer at 0x4000 .. 0x5FFF. The paper gives the bus size, the
// register/execution-bit/status-bit scheme and the contents; the map and
// the bus timing are this design's.
//
// Bus timing: CS#, WE# and OE# pass a two-flop synchronizer. A write is
// taken on the synchronized falling edge of WE# while CS# is low, so address
// and data must be stable from the start of WE# for at least 3 clock cycles
// (37.5 ns). Read data appear on uc_dout two cycles after the address (all
// reads, including the RAM-based windows, have the same latency), so OE#
// must be held at least that long plus the microcontroller's set-up time.
// uc_dout_oe is the enable of the external tristate buffer.
module uc_regs
  import amiga_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  // microcontroller bus
  input  logic [UC_AW-1:0]   uc_addr,
  input  logic [UC_DW-1:0]   uc_din,
  output logic [UC_DW-1:0]   uc_dout,
  output logic               uc_dout_oe,
  input  logic               uc_cs_n,
  input  logic               uc_we_n,
  input  logic               uc_oe_n,
  // configuration and commands
  output logic [11:0]        post_t1,
  output logic [11:0]        delay,
  output logic               test_mode,   // pattern generator replaces the inputs
  output logic [LTS_W-1:0]   t3_lts,
  output logic               dac_start,
  output logic               cal_latch,
  output logic               t3_start,
  output logic               t3_ack,
  // DAC table
  output logic               dac_tbl_we,
  output logic [6:0]         dac_tbl_waddr,
  output logic [11:0]        dac_tbl_wdata,
  output logic [6:0]         dac_tbl_raddr,
  input  logic [11:0]        dac_tbl_rdata,
  // T3 buffer
  output logic [12:0]        t3buf_raddr,
  input  logic [15:0]        t3buf_rdata,
  // status
  input  logic               dac_busy,
  input  logic               t3_busy,
  input  logic               t3_done,
  input  logic               t3_found,
  input  logic               acquiring,
  input  logic               wb_busy,
  input  logic [10:0]        t3_pos,
  input  logic [11:0]        stored,
  input  logic [LTS_W-1:0]   last_lts,
  input  logic [15:0]        dropped,
  input  logic [N_CH-1:0][31:0] cal_acc,
  input  logic [63:0]        cal_time
);
  logic [1:0] cs_s, we_s;   // [1] is the synchronized value
  logic       we_d;
  logic [UC_AW-1:0] a_q;

  wire wr = !we_s[1] && we_d && !cs_s[1];

  assign dac_tbl_raddr = 7'(uc_addr - REG_DAC_BASE);
  assign t3buf_raddr   = uc_addr[12:0];
  assign uc_dout_oe    = !uc_cs_n && !uc_oe_n;

  always_ff @(posedge clk) begin
    cs_s <= {cs_s[0], uc_cs_n};
    we_s <= {we_s[0], uc_we_n};
    we_d <= we_s[1];
    dac_start  <= 1'b0;
    cal_latch  <= 1'b0;
    t3_start   <= 1'b0;
    t3_ack     <= 1'b0;
    dac_tbl_we <= 1'b0;
    if (rst) begin
      cs_s    <= '1;
      we_s    <= '1;
      we_d    <= 1'b1;
      post_t1 <= 12'(POST_T1_DEF);
      delay   <= '0;
      test_mode <= 1'b0;
      t3_lts  <= '0;
      dac_tbl_waddr <= '0;
      dac_tbl_wdata <= '0;
    end else if (wr) begin
      unique case (uc_addr) inside
        REG_CTRL: begin
          dac_start <= uc_din[CTRL_DAC_START];
          cal_latch <= uc_din[CTRL_CAL_LATCH];
          t3_start  <= uc_din[CTRL_T3_START];
          t3_ack    <= uc_din[CTRL_T3_ACK];
        end
        REG_POST_T1:  post_t1 <= uc_din[11:0];
        REG_DELAY:    delay   <= uc_din[11:0];
        REG_TEST:     test_mode <= uc_din[0];
        REG_T3_LTS_L: t3_lts[15:0]  <= uc_din;
        REG_T3_LTS_H: t3_lts[23:16] <= uc_din[7:0];
        [REG_DAC_BASE : REG_DAC_BASE + 15'd79]: begin
          dac_tbl_we    <= 1'b1;
          dac_tbl_waddr <= 7'(uc_addr - REG_DAC_BASE);
          dac_tbl_wdata <= uc_din[11:0];
        end
        default: ;
      endcase
    end
  end

  // read: address registered once (the RAM windows answer in that cycle),
  // then the selected word is registered onto uc_dout
  logic [6:0] ci;
  assign ci = a_q[7:1];
  always_ff @(posedge clk) begin
    a_q <= uc_addr;
    if (rst) uc_dout <= '0;
    else if (a_q >= T3_BUF_BASE) uc_dout <= (a_q[13] == 1'b0) ? t3buf_rdata : '0;
    else begin
      unique case (a_q) inside
        REG_STATUS: begin
          uc_dout <= '0;
          uc_dout[ST_DAC_BUSY] <= dac_busy;
          uc_dout[ST_T3_BUSY]  <= t3_busy;
          uc_dout[ST_T3_DONE]  <= t3_done;
          uc_dout[ST_T3_FOUND] <= t3_found;
          uc_dout[ST_ACQUIRING] <= acquiring;
          uc_dout[ST_WB_BUSY]  <= wb_busy;
        end
        REG_POST_T1:    uc_dout <= {4'd0, post_t1};
        REG_DELAY:      uc_dout <= {4'd0, delay};
        REG_TEST:       uc_dout <= {15'd0, test_mode};
        REG_T3_LTS_L:   uc_dout <= t3_lts[15:0];
        REG_T3_LTS_H:   uc_dout <= {8'd0, t3_lts[23:16]};
        REG_T3_POS:     uc_dout <= {5'd0, t3_pos};
        REG_STORED:     uc_dout <= {4'd0, stored};
        REG_LAST_LTS_L: uc_dout <= last_lts[15:0];
        REG_LAST_LTS_H: uc_dout <= {8'd0, last_lts[23:16]};
        REG_DROPPED:    uc_dout <= dropped;
        [REG_DAC_BASE : REG_DAC_BASE + 15'd79]:   uc_dout <= {4'd0, dac_tbl_rdata};
        [REG_CAL_BASE : REG_CAL_BASE + 15'd127]:  uc_dout <= a_q[0] ? cal_acc[ci][31:16] : cal_acc[ci][15:0];
        [REG_TIME_BASE : REG_TIME_BASE + 15'd3]:  uc_dout <= cal_time[16*a_q[1:0] +: 16];
        default:        uc_dout <= '0;
      endcase
    end
  end
endmodule
