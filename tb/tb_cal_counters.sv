// tb_cal_counters: feeds random front-end words with a different activity
// per channel, counts the active samples independently, and checks the
// latched accumulators and time counter at several latch commands, plus
// that the latched values hold between commands.
module tb_cal_counters;
  logic clk = 0, rst = 1, latch = 0;
  logic [255:0] din = '0;
  logic [63:0][31:0] acc_q;
  logic [63:0] time_q;
  longint cnt [64];
  longint cyc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  cal_counters dut (.clk, .rst, .din, .latch, .acc_q, .time_q);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0][31:0] prev;
    logic [63:0] prev_t;
    foreach (cnt[c]) cnt[c] = 0;
    repeat (3) @(negedge clk);
    rst = 0;                  // counting starts at the next edge
    cyc = 0;
    for (int round = 0; round < 6; round++) begin
      repeat (200 + 37 * round) begin
        for (int b = 0; b < 256; b++)
          din[b] = ($urandom_range(0, 63) < (b % 64)); // channel c active with p = c/64
        for (int b = 0; b < 256; b++) if (din[b]) cnt[b % 64]++;
        cyc++;
        @(negedge clk);
      end
      latch = 1;              // takes the counts up to the previous cycle
      din = '0;
      @(negedge clk);
      latch = 0;
      for (int c = 0; c < 64; c++)
        chk(acc_q[c] == 32'(cnt[c]), $sformatf("round %0d ch %0d: %0d expected %0d", round, c, acc_q[c], cnt[c]));
      chk(time_q == 64'(cyc), $sformatf("time %0d expected %0d", time_q, cyc));
      prev = acc_q; prev_t = time_q;
      cyc++;                  // the latch cycle itself
      repeat (20) begin
        din = '1;
        for (int c = 0; c < 64; c++) cnt[c] += 4;
        cyc++;
        @(negedge clk);
      end
      chk(acc_q == prev && time_q == prev_t, "latched values changed without a latch command");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
