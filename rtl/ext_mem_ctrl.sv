// ext_mem_ctrl: controller of the external asynchronous SRAM bank.
//
// The bank is 8 MWord x 32 bit with a plain 23-bit address, a 32-bit data
// bus and active-low CE#, RD# (oe_n) and WR# (we_n). Every word transfer
// takes CYC clock cycles (6 at 80 MHz = 75 ns, the paper's DMA access time):
// CE# is low for all of them, for a write the data bus is driven for all of
// them and WR# is low in cycles 1 .. CYC-2, for a read RD# is low for all of
// them and the data are taken at the end of the last cycle. All pins are
// registered. Back-to-back transfers follow without a gap, so a block of
// 4096 words takes 4096 x 75 ns = 307.2 us.
//
// Two DMA clients share the bank (the paper's three sources: the two
// circular buffers, which share one write-back engine, and the T3 read).
// Arbitration is per word with fixed priority to client 0, the event
// write-back, which must keep up with acquisition. A client holds req with
// its word until gnt; done pulses, with rdata for a read, one cycle after
// the transfer's last cycle. Pin timing and arbitration are this design's
// choices. (The req bit of the selected request is not read again after
// arbitration; lint lists it as unused.)
module ext_mem_ctrl
  import amiga_pkg::*;
#(
  parameter int CYC = 6
) (
  input  logic               clk,
  input  logic               rst,
  input  mem_req_t           c0_req,
  output mem_rsp_t           c0_rsp,
  input  mem_req_t           c1_req,
  output mem_rsp_t           c1_rsp,
  output logic [SRAM_AW-1:0] sram_addr,
  output logic [SRAM_DW-1:0] sram_dq_o,
  input  logic [SRAM_DW-1:0] sram_dq_i,
  output logic               sram_dq_oe,
  output logic               sram_ce_n,
  output logic               sram_oe_n,
  output logic               sram_we_n
);
  localparam int PW = $clog2(CYC);

  logic          busy;
  logic [PW-1:0] phase;
  logic          cur_we;
  logic          owner;       // client of the current transfer
  logic          done_q, done_owner;
  logic [SRAM_DW-1:0] rdata_q;

  wire last   = busy && (phase == PW'(CYC - 1));
  wire accept = (!busy || last) && (c0_req.req || c1_req.req);
  wire sel    = !c0_req.req;  // 0: client 0 wins
  mem_req_t cur;
  assign cur = sel ? c1_req : c0_req;

  always_ff @(posedge clk) begin
    done_q <= 1'b0;
    if (rst) begin
      busy       <= 1'b0;
      phase      <= '0;
      cur_we     <= 1'b0;
      owner      <= 1'b0;
      done_owner <= 1'b0;
      rdata_q    <= '0;
      sram_addr  <= '0;
      sram_dq_o  <= '0;
      sram_dq_oe <= 1'b0;
      sram_ce_n  <= 1'b1;
      sram_oe_n  <= 1'b1;
      sram_we_n  <= 1'b1;
    end else begin
      if (busy) begin
        phase <= phase + PW'(1);
        if (cur_we && phase == PW'(0))       sram_we_n <= 1'b0;
        if (cur_we && phase == PW'(CYC - 3)) sram_we_n <= 1'b1;
      end
      if (last) begin
        done_q     <= 1'b1;
        done_owner <= owner;
        rdata_q    <= sram_dq_i;
        busy       <= 1'b0;
        sram_ce_n  <= 1'b1;
        sram_oe_n  <= 1'b1;
        sram_dq_oe <= 1'b0;
      end
      if (accept) begin
        busy       <= 1'b1;
        phase      <= '0;
        owner      <= sel;
        cur_we     <= cur.we;
        sram_addr  <= cur.addr;
        sram_dq_o  <= cur.wdata;
        sram_dq_oe <= cur.we;
        sram_ce_n  <= 1'b0;
        sram_oe_n  <= cur.we;
        sram_we_n  <= 1'b1;
      end
    end
  end

  always_comb begin
    c0_rsp.gnt    = accept && !sel;
    c1_rsp.gnt    = accept &&  sel;
    c0_rsp.rvalid = done_q && !done_owner;
    c1_rsp.rvalid = done_q &&  done_owner;
    c0_rsp.rdata  = rdata_q;
    c1_rsp.rdata  = rdata_q;
  end

  // the write strobe never overlaps the read strobe
  a_strobes: assert property (@(posedge clk) disable iff (rst) !(!sram_we_n && !sram_oe_n));
  a_we_in_ce: assert property (@(posedge clk) disable iff (rst) !sram_we_n |-> !sram_ce_n);
endmodule
