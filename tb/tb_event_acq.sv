// tb_event_acq: feeds the acquisition with words that carry their own write
// cycle number, sends T1s with their LTS and checks each frozen event: the
// buffers alternate, the event's first word is the oldest of the ring, the
// 512 words are consecutive and end exactly (post_t1 - delay) / 4 words after
// the T1, and the LTS is attached. Also checks a T1 during the post-T1 count
// is ignored, the pause when both buffers wait for the DMA (T1s dropped and
// counted) and the restart after a release.
module tb_event_acq;
  import amiga_pkg::*;
  logic clk = 0, rst = 1;
  logic [255:0] din = '0;
  logic t1 = 0, lts_valid = 0, release_buf = 0;
  logic [23:0] lts = '0;
  logic [11:0] post_t1 = 12'd1536, delay = 12'd0;
  event_desc_t ev;
  logic [12:0] raddr = '0;
  logic [31:0] rdata;
  logic acquiring;
  logic [15:0] dropped;
  int checks = 0, failures = 0;
  int stamp = 0;
  int n_events = 0, n_pause = 0, n_drop = 0, n_ignored = 0;

  always #5 clk = ~clk;
  event_acq dut (.clk, .rst, .din, .t1, .lts, .lts_valid, .post_t1, .delay, .ev,
                 .release_buf, .raddr, .rdata, .acquiring, .dropped);

  // a new stamped word before every rising edge
  always @(negedge clk) begin
    stamp++;
    for (int s = 0; s < 8; s++) din[32*s +: 32] = {4'(s), 28'(stamp)};
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // T1 at the next edge; returns the stamp of the word written at that edge
  task automatic trigger(output int st);
    @(negedge clk); #1;
    st = stamp;
    t1 = 1;
    @(negedge clk); t1 = 0;
  endtask

  task automatic give_lts(input logic [23:0] v);
    @(negedge clk); #1 lts = v; lts_valid = 1;
    @(negedge clk); lts_valid = 0;
  endtask

  // read and check the frozen event, then release it
  task automatic check_event(input int st, input int post_w, input logic [23:0] v,
                             input logic exp_buf, input bit do_release);
    logic [31:0] w;
    int bad = 0;
    while (!ev.valid) @(negedge clk);
    chk(ev.buf_sel == exp_buf, $sformatf("event in buffer %0d, expected %0d", ev.buf_sel, exp_buf));
    chk(ev.lts == v, $sformatf("event LTS %h expected %h", ev.lts, v));
    for (int j = 0; j < 512; j++)
      for (int s = 0; s < 8; s++) begin
        @(negedge clk) raddr = {ev.buf_sel, 9'(ev.start + 9'(j)), 3'(s)};
        @(posedge clk); #1 w = rdata;
        if (w != {4'(s), 28'(st + post_w - 511 + j)}) begin
          bad++;
          if (bad < 3) $display("word %0d slice %0d: %h expected %h", j, s, w, {4'(s), 28'(st + post_w - 511 + j)});
        end
      end
    chk(bad == 0, $sformatf("%0d wrong words in the event", bad));
    n_events++;
    if (do_release) begin
      @(negedge clk) release_buf = 1;
      @(negedge clk) release_buf = 0;
    end
  endtask

  initial begin
    int st, st2;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (600) @(negedge clk);
    // 1. default: 1536 post-T1 samples = 384 words
    trigger(st);
    give_lts(24'hABCDEF);
    // a second T1 during the post-T1 count is ignored
    repeat (50) @(negedge clk);
    trigger(st2); n_ignored++;
    check_event(st, 384, 24'hABCDEF, 0, 1);
    chk(dropped == 0, "ignored T1 counted as dropped");
    // 2. other buffer, post 1000 samples minus a delay of 40 samples = 240 words
    post_t1 = 12'd1000; delay = 12'd40;
    repeat (600) @(negedge clk);
    trigger(st);
    give_lts(24'h123456);
    check_event(st, 240, 24'h123456, 1, 1);
    // 3. pause: two events without release, a third T1 is dropped
    post_t1 = 12'd2048; delay = 12'd0;    // the whole buffer after T1
    repeat (600) @(negedge clk);
    trigger(st);
    give_lts(24'h000111);
    repeat (600) @(negedge clk);
    trigger(st2);
    give_lts(24'h000222);
    repeat (600) @(negedge clk);
    chk(!acquiring, "acquisition must pause with both buffers frozen");
    n_pause++;
    begin
      int dummy;
      trigger(dummy);
    end
    @(negedge clk);
    chk(dropped == 1, $sformatf("dropped = %0d", dropped));
    n_drop = dropped;
    check_event(st, 512, 24'h000111, 0, 1);
    @(negedge clk);
    chk(acquiring, "acquisition restarts after a release");
    check_event(st2, 512, 24'h000222, 1, 1);
    // 4. short post-T1 (LTS arrives after the freeze)
    post_t1 = 12'd16;
    repeat (600) @(negedge clk);
    trigger(st);
    repeat (20) @(negedge clk);
    chk(!ev.valid, "event offered before its LTS");
    give_lts(24'h00BEEF);
    check_event(st, 4, 24'h00BEEF, 0, 1);
    chk(n_events == 5 && n_pause == 1 && n_drop == 1 && n_ignored == 1, "all cases ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
