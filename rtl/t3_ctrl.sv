// t3_ctrl: recall of a stored event on a T3 request.
//
// On 'start' the requested LTS is searched for in the timestamp table,
// newest entry first, over the 'stored' valid entries; the table is read one
// entry per cycle and each answer is compared one cycle later. When the LTS
// is found at position p, the 4096 words at external addresses {p, 0} ..
// {p, 4095} are read through the external RAM controller into the T3 buffer,
// and then 'done' rises with 'found' set and 'pos' = p. If the search ends
// without a match, 'done' rises with 'found' clear (the paper's not-found
// flag). 'done' stays high, and drives the microcontroller notification,
// until 'ack' or the next 'start'. Search order, the sticky done flag and
// the timing are this design's choices; the search and the address link
// follow the paper.
//
// The request to the memory controller is always a read, so its write
// fields are constant, and the T3 buffer data are the memory read data
// passed straight through.
//
// Timing: a search takes up to stored + 2 cycles (about 26 us at 2048
// entries); the read of an event takes 4096 x 75 ns = 307.2 us.
module t3_ctrl
  import amiga_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  input  logic                        ack,
  input  logic [LTS_W-1:0]            lts,
  input  logic [$clog2(N_EVENTS):0]   stored,
  input  logic [$clog2(N_EVENTS)-1:0] wr_idx,   // newest entry is wr_idx - 1
  output logic [$clog2(N_EVENTS)-1:0] ts_raddr,
  input  logic [LTS_W-1:0]            ts_rdata,
  output mem_req_t                    mem_req,
  input  mem_rsp_t                    mem_rsp,
  output logic                        buf_we,
  output logic [$clog2(EVENT_DWORDS)-1:0] buf_waddr,
  output logic [31:0]                 buf_wdata,
  output logic                        busy,
  output logic                        done,
  output logic                        found,
  output logic [$clog2(N_EVENTS)-1:0] pos
);
  localparam int IW = $clog2(N_EVENTS);       // 11
  localparam int NW = $clog2(EVENT_DWORDS);   // 12

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_READ} state_t;
  state_t state;

  logic [LTS_W-1:0] want;
  logic [IW:0]      k;          // entries issued
  logic             pend;       // ts_rdata answers entry pend_idx
  logic [IW-1:0]    pend_idx;
  logic [NW-1:0]    ri;         // next word to request
  logic             rdone_req;  // all words requested
  logic [NW:0]      nrec;       // words received

  assign ts_raddr = IW'(wr_idx - IW'(1) - k[IW-1:0]);

  always_comb begin
    mem_req.req   = (state == S_READ) && !rdone_req;
    mem_req.we    = 1'b0;
    mem_req.addr  = {pos, ri};
    mem_req.wdata = '0;
  end

  assign buf_we    = (state == S_READ) && mem_rsp.rvalid;
  assign buf_waddr = nrec[NW-1:0];
  assign buf_wdata = mem_rsp.rdata;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      want  <= '0;
      k     <= '0;
      pend  <= 1'b0;
      pend_idx <= '0;
      ri    <= '0;
      rdone_req <= 1'b0;
      nrec  <= '0;
      done  <= 1'b0;
      found <= 1'b0;
      pos   <= '0;
    end else begin
      if (ack) done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          want  <= lts;
          k     <= '0;
          pend  <= 1'b0;
          done  <= 1'b0;
          found <= 1'b0;
          state <= S_SEARCH;
        end
        S_SEARCH: begin
          if (pend && ts_rdata == want) begin
            pos   <= pend_idx;
            ri    <= '0;
            nrec  <= '0;
            rdone_req <= 1'b0;
            pend  <= 1'b0;
            state <= S_READ;
          end else if (k < stored) begin
            pend     <= 1'b1;
            pend_idx <= ts_raddr;
            k        <= k + 1'b1;
          end else if (pend) begin
            pend <= 1'b0;          // last answer compared next cycle
          end else begin
            done  <= 1'b1;         // not found
            state <= S_IDLE;
          end
        end
        S_READ: begin
          if (mem_rsp.gnt) begin
            ri <= ri + 1'b1;
            if (ri == NW'(EVENT_DWORDS - 1)) rdone_req <= 1'b1;
          end
          if (mem_rsp.rvalid) begin
            nrec <= nrec + 1'b1;
            if (nrec == (NW+1)'(EVENT_DWORDS - 1)) begin
              done  <= 1'b1;
              found <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
