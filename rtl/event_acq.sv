// event_acq: continuous acquisition into two circular buffers, frozen a
// programmable number of samples after T1.
//
// The front-end bus (four samples of 64 channels per 80 MHz cycle) is written
// without pause into the active buffer of a dual-port RAM (dp_ram_asym) at the
// address of a free-running 9-bit address counter, so the buffer always holds
// the last 2048 samples. As in the paper's acquisition schematic, an SR
// flip-flop is set by T1; while it is clear its inverted output forces the
// pre-T1 counter to load the post-T1 length, and once it is set the counter
// counts down. When it has counted the post-T1 words its carry stops the
// address counter: the buffer then holds (2048 - post) pre-T1 and post post-T1
// samples and the address counter points at the oldest word, the event's
// first word. That address is latched together with a new-event flag. The
// second buffer takes over at once; the frozen buffer stays untouched until
// the DMA signals 'release' (the paper's "Read event").
//
// Lengths are counted in 80 MHz words of four samples: the post-T1 length is
// (post_t1 - delay) / 4 words, post_t1 being the MC T1-bin register and delay
// the cable-delay compensation register (both in samples). The T1 bin is thus
// resolved to one 80 MHz word.
//
// This design's own choices: buffers alternate strictly; if the other buffer is
// still waiting for the DMA when an event ends, acquisition pauses and T1s are
// counted in 'dropped' until a buffer is released; T1 while an event is
// being counted is ignored (the surface never sends nested triggers); the LTS
// that arrives on the T1 line after the trigger is attached to the buffer that
// the trigger froze, and the event is offered to the DMA only once both the
// buffer is frozen and its LTS has arrived. The frame that follows an ignored
// or dropped T1 is not kept, so it cannot overwrite a stored event's LTS.
//
// The two LSBs of the post-T1 length in samples are unused (lint reports
// them): the freeze point is counted in whole 80 MHz words.
//
// Interface: ev describes the oldest frozen event (valid until release);
// raddr/rdata is the 32-bit read port of the RAM, one cycle latency.
module event_acq
  import amiga_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic [BUS_W-1:0]    din,
  input  logic                t1,
  input  logic [LTS_W-1:0]    lts,
  input  logic                lts_valid,
  input  logic [11:0]         post_t1,   // samples after T1 (reset value 1536 in uc_regs)
  input  logic [11:0]         delay,     // cable delay to subtract, samples
  output event_desc_t         ev,
  input  logic                release_buf,
  input  logic [12:0]         raddr,
  output logic [31:0]         rdata,
  output logic                acquiring,   // address counter running
  output logic [15:0]         dropped
);
  logic       act;          // active buffer
  logic       running;      // address counter enable (write enable)
  logic       armed;        // SR flip-flop Q (set by T1)
  logic [8:0] acnt;         // address counter
  logic [9:0] pre_cnt;      // pre-T1 counter (words)
  logic [1:0] frozen;
  logic [1:0] lts_ok;
  logic       lts_wait;     // an accepted T1 still waits for its LTS
  logic [LTS_W-1:0] buf_lts [2];
  logic [8:0] buf_start [2];
  logic       trig_buf;     // buffer the last T1 froze / is freezing
  logic       next_out;     // oldest frozen buffer (buffers alternate)

  // post-T1 length in words, at least one
  logic [11:0] post_s;
  logic [9:0]  post_w;
  always_comb begin
    post_s = (post_t1 > delay) ? post_t1 - delay : 12'd4;
    post_w = (post_s[11:2] == '0) ? 10'd1 : post_s[11:2];
    if (post_w > 10'd512) post_w = 10'd512;
  end

  wire carry = armed && (pre_cnt == '0);   // last post-T1 word written now

  dp_ram_asym #(.WW(BUS_W), .RW(32), .WDEPTH(2*EVENT_WORDS)) u_ram (
    .clk, .we(running), .waddr({act, acnt}), .wdata(din), .raddr, .rdata);

  always_ff @(posedge clk) begin
    if (rst) begin
      act      <= 1'b0;
      running  <= 1'b1;
      armed    <= 1'b0;
      acnt     <= '0;
      pre_cnt  <= '0;
      frozen   <= '0;
      lts_ok   <= '0;
      lts_wait <= 1'b0;
      trig_buf <= 1'b0;
      next_out <= 1'b0;
      dropped  <= '0;
      buf_lts[0] <= '0;  buf_lts[1] <= '0;
      buf_start[0] <= '0; buf_start[1] <= '0;
    end else begin
      // pre-T1 counter: forced load while the SR flip-flop is clear
      if (!armed)       pre_cnt <= post_w - 10'd1;
      else if (running) pre_cnt <= pre_cnt - 10'd1;

      if (running) acnt <= acnt + 9'd1;

      // SR flip-flop
      if (t1 && running && !armed) begin
        armed    <= 1'b1;
        trig_buf <= act;
        lts_ok[act] <= 1'b0;
        lts_wait <= 1'b1;
      end else if (t1 && !running) begin
        dropped <= dropped + 16'd1;
      end

      // LTS for the event being (or just) frozen
      // (the LTS of an ignored or dropped T1 is not kept)
      if (lts_valid && lts_wait) begin
        buf_lts[trig_buf] <= lts;
        lts_ok[trig_buf]  <= 1'b1;
        lts_wait          <= 1'b0;
      end

      // carry: freeze the active buffer, latch its first word
      if (carry && running) begin
        armed            <= 1'b0;
        frozen[act]      <= 1'b1;
        buf_start[act]   <= acnt + 9'd1;
        if (!frozen[~act] || (release_buf && next_out == ~act)) begin
          act  <= ~act;
          acnt <= '0;
        end else begin
          running <= 1'b0;
        end
      end

      // DMA finished with the oldest frozen buffer
      if (release_buf) begin
        frozen[next_out] <= 1'b0;
        next_out         <= ~next_out;
        if (!running) begin
          running <= 1'b1;
          act     <= next_out;
          acnt    <= '0;
        end
      end
    end
  end

  assign ev.valid   = frozen[next_out] && lts_ok[next_out];
  assign ev.buf_sel = next_out;
  assign ev.start   = buf_start[next_out];
  assign ev.lts     = buf_lts[next_out];
  assign acquiring  = running;

  // a release only ever follows a valid event
  a_release: assert property (@(posedge clk) disable iff (rst) release_buf |-> ev.valid);
endmodule
