// event_writer: DMA of frozen circular buffers into the external RAM ring.
//
// When event_acq offers a frozen buffer (ev.valid), the writer stores the
// event's LTS in the timestamp table at the current event index, then copies
// the 4096 32-bit words of the buffer, starting at the event's first word
// and wrapping around the 512-word ring, to external addresses
// {index, 0} .. {index, 4095}: the 11 MSBs of the address are the index,
// the 12 LSBs the word number, as the paper links data and timestamp. After
// the last word is written it releases the buffer (the paper's "Read event"),
// advances the index modulo 2048, overwriting the oldest event, and counts
// stored events up to 2048.
//
// The buffer word for the next transfer is fetched while the current one is
// on the bus, so the copy runs at the controller's full rate (one word per
// 75 ns, 307.2 us per event). The writer only writes, so the read data of
// the memory response is left unused; its requests always have we set and
// carry the buffer read data straight through as write data.
module event_writer
  import amiga_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst,
  input  event_desc_t                   ev,
  output logic                          release_buf,
  output logic [12:0]                   raddr,
  input  logic [31:0]                   rdata,
  output mem_req_t                      mem_req,
  input  mem_rsp_t                      mem_rsp,
  output logic                          ts_we,
  output logic [$clog2(N_EVENTS)-1:0]   ts_waddr,
  output logic [LTS_W-1:0]              ts_wdata,
  output logic [$clog2(N_EVENTS)-1:0]   wr_idx,   // next slot to write
  output logic [$clog2(N_EVENTS):0]     stored,   // valid slots
  output logic                          busy
);
  localparam int NW = $clog2(EVENT_DWORDS);  // 12

  typedef enum logic [1:0] {S_IDLE, S_COPY, S_FLUSH} state_t;
  state_t state;

  logic [NW-1:0] i;        // word being fetched / offered
  logic          dvalid;   // rdata holds word i
  logic [NW:0]   ndone;    // words written

  // buffer read address: word (start + i/8) mod 512, slice i mod 8
  assign raddr = {ev.buf_sel, 9'(ev.start + 9'(i[NW-1:3])), i[2:0]};

  always_comb begin
    mem_req.req   = (state == S_COPY) && dvalid;
    mem_req.we    = 1'b1;
    mem_req.addr  = {wr_idx, i};
    mem_req.wdata = rdata;
  end

  always_ff @(posedge clk) begin
    ts_we       <= 1'b0;
    release_buf <= 1'b0;
    if (rst) begin
      state  <= S_IDLE;
      i      <= '0;
      dvalid <= 1'b0;
      ndone  <= '0;
      wr_idx <= '0;
      stored <= '0;
      ts_waddr <= '0;
      ts_wdata <= '0;
    end else begin
      if (mem_rsp.rvalid) ndone <= ndone + 1'b1;
      unique case (state)
        S_IDLE: if (ev.valid && !release_buf) begin
          ts_we    <= 1'b1;
          ts_waddr <= wr_idx;
          ts_wdata <= ev.lts;
          i        <= '0;
          dvalid   <= 1'b0;
          ndone    <= '0;
          state    <= S_COPY;
        end
        S_COPY: begin
          dvalid <= 1'b1;            // RAM answers one cycle after raddr
          if (mem_rsp.gnt) begin
            dvalid <= 1'b0;
            if (i == NW'(EVENT_DWORDS - 1)) state <= S_FLUSH;
            else                            i <= i + 1'b1;
          end
        end
        S_FLUSH: if (ndone == (NW+1)'(EVENT_DWORDS) ||
                     (mem_rsp.rvalid && ndone == (NW+1)'(EVENT_DWORDS - 1))) begin
          release_buf <= 1'b1;
          wr_idx      <= wr_idx + 1'b1;
          if (stored != ($clog2(N_EVENTS)+1)'(N_EVENTS)) stored <= stored + 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
