// amiga_mc_fpga: digital-board FPGA of an AMIGA underground muon-counter
// module.
//
// The 64 discriminated scintillator channels are sampled at 320 MHz by the
// front end and handed on as a 256-bit bus at 80 MHz, the clock of all other
// logic. event_acq writes that bus without pause into one of two circular
// buffers of 2048 samples; a T1 trigger stripped from the surface T1 line by
// t1_rx freezes the buffer a programmable number of samples later (1536 by
// default), and the LTS timestamp that follows the trigger on the same line
// tags the event. event_writer copies each frozen buffer to the external SRAM
// ring of 2048 events and records its LTS in ts_table at the same index
// (the index is the top 11 bits of the event's 23-bit SRAM address). On a T3
// request from the microcontroller, t3_ctrl searches ts_table for the LTS and
// reads the event back into t3_buffer, from where the microcontroller reads
// it; uc_irq tells it the search has ended. dac_ctrl programs the
// discriminator thresholds over SPI and cal_counters accumulates the
// positive samples per channel for the threshold calibration loop.
// uc_regs is the microcontroller's window on all of it. For the hardware
// test, a register bit switches the front end from the discriminator lines
// to pattern_gen, a 320 MHz pattern with a timestamp and a channel number.
//
// Clocks: clk320 and clk80 come from the FPGA PLL (not modelled) and must be
// in phase; rst is synchronous to clk80 and must also be seen by clk320
// (it is held for several cycles). The SRAM data bus is split into
// sram_dq_o / sram_dq_i / sram_dq_oe, and the microcontroller data bus into
// uc_din / uc_dout / uc_dout_oe, for the pad tristate buffers. dac_ctrl's
// done pulse is left open: the microcontroller polls the DAC busy bit.
module amiga_mc_fpga
  import amiga_pkg::*;
(
  input  logic               clk320,
  input  logic               clk80,
  input  logic               rst,
  // analog boards
  input  logic [N_CH-1:0]    disc,
  // surface T1 line (LVDS receiver output)
  input  logic               t1_line,
  // external SRAM bank
  output logic [SRAM_AW-1:0] sram_addr,
  output logic [SRAM_DW-1:0] sram_dq_o,
  input  logic [SRAM_DW-1:0] sram_dq_i,
  output logic               sram_dq_oe,
  output logic               sram_ce_n,
  output logic               sram_oe_n,
  output logic               sram_we_n,
  // threshold DACs
  output logic               dac_sclk,
  output logic               dac_din,
  output logic [7:0]         dac_fs_n,
  output logic               dac_ldac_n,
  // control-board microcontroller
  input  logic [UC_AW-1:0]   uc_addr,
  input  logic [UC_DW-1:0]   uc_din,
  output logic [UC_DW-1:0]   uc_dout,
  output logic               uc_dout_oe,
  input  logic               uc_cs_n,
  input  logic               uc_we_n,
  input  logic               uc_oe_n,
  output logic               uc_irq
);
  logic [BUS_W-1:0] fe_bus;
  logic             t1_pulse, lts_valid;
  logic [LTS_W-1:0] lts, last_lts;
  logic [11:0]      post_t1, delay;
  logic             test_mode;
  logic [N_CH-1:0]  pat, fe_in;
  event_desc_t      ev;
  logic             release_buf, acquiring;
  logic [12:0]      buf_raddr;
  logic [31:0]      buf_rdata;
  logic [15:0]      dropped;
  mem_req_t         wb_req, t3_req;
  mem_rsp_t         wb_rsp, t3_rsp;
  logic             ts_we;
  logic [10:0]      ts_waddr, ts_raddr, wr_idx, t3_pos;
  logic [LTS_W-1:0] ts_wdata, ts_rdata, t3_lts;
  logic [11:0]      stored;
  logic             wb_busy;
  logic             t3b_we;
  logic [11:0]      t3b_waddr;
  logic [31:0]      t3b_wdata;
  logic [12:0]      t3b_raddr;
  logic [15:0]      t3b_rdata;
  logic             t3_start, t3_ack, t3_busy, t3_done, t3_found;
  logic             dac_start, dac_busy, cal_latch;
  logic             dac_tbl_we;
  logic [6:0]       dac_tbl_waddr, dac_tbl_raddr;
  logic [11:0]      dac_tbl_wdata, dac_tbl_rdata;
  logic [N_CH-1:0][31:0] cal_acc;
  logic [63:0]      cal_time;

  // test mode: the internal pattern replaces the discriminator lines
  // (test_mode is a static register bit; clk80 and clk320 are in phase)
  pattern_gen #(.N_CH(N_CH)) u_pat (.clk320, .rst, .pat);
  assign fe_in = test_mode ? pat : disc;

  front_end #(.N_CH(N_CH), .SPW(SPW)) u_fe (
    .clk320, .clk80, .rst, .din(fe_in), .dout(fe_bus));

  t1_rx #(.LTS_W(LTS_W)) u_t1 (
    .clk(clk80), .rst, .t1_line, .t1_pulse, .lts, .lts_valid);

  always_ff @(posedge clk80)
    if (rst)            last_lts <= '0;
    else if (lts_valid) last_lts <= lts;

  event_acq u_acq (
    .clk(clk80), .rst, .din(fe_bus), .t1(t1_pulse), .lts, .lts_valid,
    .post_t1, .delay, .ev, .release_buf, .raddr(buf_raddr), .rdata(buf_rdata),
    .acquiring, .dropped);

  event_writer u_wb (
    .clk(clk80), .rst, .ev, .release_buf, .raddr(buf_raddr), .rdata(buf_rdata),
    .mem_req(wb_req), .mem_rsp(wb_rsp), .ts_we, .ts_waddr, .ts_wdata,
    .wr_idx, .stored, .busy(wb_busy));

  ts_table #(.DEPTH(N_EVENTS), .W(LTS_W)) u_ts (
    .clk(clk80), .we(ts_we), .waddr(ts_waddr), .wdata(ts_wdata),
    .raddr(ts_raddr), .rdata(ts_rdata));

  t3_ctrl u_t3 (
    .clk(clk80), .rst, .start(t3_start), .ack(t3_ack), .lts(t3_lts), .stored,
    .wr_idx, .ts_raddr, .ts_rdata, .mem_req(t3_req), .mem_rsp(t3_rsp),
    .buf_we(t3b_we), .buf_waddr(t3b_waddr), .buf_wdata(t3b_wdata),
    .busy(t3_busy), .done(t3_done), .found(t3_found), .pos(t3_pos));

  t3_buffer #(.DEPTH(EVENT_DWORDS)) u_t3b (
    .clk(clk80), .we(t3b_we), .waddr(t3b_waddr), .wdata(t3b_wdata),
    .raddr(t3b_raddr), .rdata(t3b_rdata));

  ext_mem_ctrl u_mem (
    .clk(clk80), .rst, .c0_req(wb_req), .c0_rsp(wb_rsp),
    .c1_req(t3_req), .c1_rsp(t3_rsp), .sram_addr, .sram_dq_o, .sram_dq_i,
    .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n);

  dac_ctrl u_dac (
    .clk(clk80), .rst, .tbl_we(dac_tbl_we), .tbl_waddr(dac_tbl_waddr),
    .tbl_wdata(dac_tbl_wdata), .tbl_raddr(dac_tbl_raddr),
    .tbl_rdata(dac_tbl_rdata), .start(dac_start), .busy(dac_busy),
    .done(), .sclk(dac_sclk), .din(dac_din), .fs_n(dac_fs_n),
    .ldac_n(dac_ldac_n));

  cal_counters #(.N_CH(N_CH), .SPW(SPW)) u_cal (
    .clk(clk80), .rst, .din(fe_bus), .latch(cal_latch),
    .acc_q(cal_acc), .time_q(cal_time));

  uc_regs u_regs (
    .clk(clk80), .rst, .uc_addr, .uc_din, .uc_dout, .uc_dout_oe, .uc_cs_n,
    .uc_we_n, .uc_oe_n, .post_t1, .delay, .test_mode, .t3_lts, .dac_start, .cal_latch,
    .t3_start, .t3_ack, .dac_tbl_we, .dac_tbl_waddr, .dac_tbl_wdata,
    .dac_tbl_raddr, .dac_tbl_rdata, .t3buf_raddr(t3b_raddr),
    .t3buf_rdata(t3b_rdata), .dac_busy, .t3_busy, .t3_done, .t3_found, .acquiring, .wb_busy,
    .t3_pos, .stored, .last_lts, .dropped, .cal_acc, .cal_time);

  assign uc_irq = t3_done;
endmodule
