// tb_amiga_mc_fpga: end-to-end run of the whole FPGA at its default sizes.
//
// The discriminator lines carry a test pattern in the spirit of the paper's
// hardware test: lines 0..28 carry a 29-bit sample counter (a timestamp that
// makes every 320 MHz sample unique) and lines 29..63 a pseudo-random
// function of it. A surface-station model sends T1 frames with LTS values,
// a behavioural SRAM stands in for the external bank, and the testbench
// plays the microcontroller on the register bus. The run:
//   1. programs the 80 DAC registers and checks the SPI words and LDAC#;
//   2. sends three T1s close together: the second buffer takes over while the
//      first is copied, and the third finds both buffers full and is dropped;
//   3. recalls the second event by its LTS and checks all 2048 samples read
//      through the T3 window: consecutive, with the T1 about 512 samples in;
//   4. sends a fourth T1 and at once recalls the first event, so the event
//      write-back and the T3 read compete for the external RAM;
//   5. asks for an LTS never sent (not found);
//   6. latches the calibration counters and checks them against the pattern;
//   7. switches the front end to the internal test-pattern generator, takes
//      and recalls one more event, and finds in it whole frames with a
//      common timestamp advancing by one frame length and each line's own
//      channel number.
// Each mechanism is counted and one that never happens is a failure.
module tb_amiga_mc_fpga;
  import amiga_pkg::*;
  logic clk320 = 0, clk80 = 0, rst = 1;
  logic [63:0] disc = '0;
  logic t1_line;
  logic [22:0] sram_addr;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  int sram_errors;
  logic dac_sclk, dac_din, dac_ldac_n;
  logic [7:0] dac_fs_n;
  logic [14:0] uc_addr = '0;
  logic [15:0] uc_din = '0, uc_dout;
  logic uc_dout_oe, uc_cs_n = 1, uc_we_n = 1, uc_oe_n = 1, uc_irq;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_switch = 0, n_pause = 0, n_drop = 0, n_found = 0, n_notfound = 0;
  int n_contend = 0, n_dac_words = 0, n_ldac = 0, n_cal = 0, n_events_stored = 0, n_test = 0;

  amiga_mc_fpga dut (.clk320, .clk80, .rst, .disc, .t1_line, .sram_addr, .sram_dq_o,
    .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n, .dac_sclk, .dac_din,
    .dac_fs_n, .dac_ldac_n, .uc_addr, .uc_din, .uc_dout, .uc_dout_oe, .uc_cs_n,
    .uc_we_n, .uc_oe_n, .uc_irq);
  sram_model u_sram (.addr(sram_addr), .dq_in(sram_dq_o), .dq_oe(sram_dq_oe),
    .dq_out(sram_dq_i), .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n),
    .errors(sram_errors));
  // 1 unit = 0.3125 ns: clk320 period 10 units, 100 ns = 320 units
  ls_t1_tx #(.UNITS_PER_100NS(320)) u_ls (.line(t1_line));

  initial forever for (int i = 0; i < 4; i++) begin
    #5 clk320 = 1; if (i == 0) clk80 = 1;
    #5 clk320 = 0; if (i == 2) clk80 = 0;
  end

  // ---- test pattern on the discriminator lines ----
  int unsigned scount = 0;       // samples taken so far
  longint ones [64];
  bit count_ones = 0;
  function automatic logic [34:0] hashbits(int unsigned s);
    logic [63:0] x = {32'h9E3779B9, s} * 64'hD1B54A32D192ED03;
    return x[63:29];
  endfunction
  always @(posedge clk320) begin
    if (count_ones) for (int c = 0; c < 64; c++) ones[c] += disc[c];
    scount++;
    #1 disc = rst ? '0 : {hashbits(scount), 29'(scount)};
  end

  // ---- monitors ----
  logic act_q = 0, acq_q = 1;
  logic [15:0] drop_q = 0;
  int dac_bits = 0;
  logic [15:0] dac_sh;
  always @(negedge clk80) if (!rst) begin
    if (dut.u_acq.act != act_q && dut.u_acq.running && acq_q) n_switch++;
    if (acq_q && !dut.u_acq.running) n_pause++;
    if (dut.u_acq.dropped != drop_q) n_drop++;
    if (dut.u_mem.c0_req.req && dut.u_mem.c1_req.req && dut.u_mem.accept) n_contend++;
    act_q = dut.u_acq.act; acq_q = dut.u_acq.running; drop_q = dut.u_acq.dropped;
  end
  always @(negedge dac_sclk) if (dac_fs_n != 8'hFF) begin
    dac_sh = {dac_sh[14:0], dac_din};
    dac_bits++;
    if (dac_bits % 16 == 0) n_dac_words++;
  end
  always @(negedge dac_ldac_n) if (!rst) n_ldac++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---- microcontroller bus ----
  task automatic bus_write(input logic [14:0] a, input logic [15:0] d);
    @(negedge clk80);
    uc_addr = a; uc_din = d; uc_cs_n = 0;
    @(negedge clk80) uc_we_n = 0;
    repeat (4) @(negedge clk80);
    uc_we_n = 1;
    @(negedge clk80) uc_cs_n = 1;
  endtask
  task automatic bus_read(input logic [14:0] a, output logic [15:0] d);
    @(negedge clk80);
    uc_addr = a; uc_cs_n = 0; uc_oe_n = 0;
    repeat (3) @(negedge clk80);
    d = uc_dout;
    uc_oe_n = 1; uc_cs_n = 1;
  endtask
  task automatic wait_stored(input int n);
    logic [15:0] d;
    do begin repeat (200) @(negedge clk80); bus_read(REG_STORED, d); end while (d < 16'(n));
  endtask

  // recall an event; returns found flag and cycles until done
  task automatic t3_request(input logic [23:0] lts, output bit found, output int cyc);
    logic [15:0] d;
    cyc = 0;
    bus_write(REG_T3_LTS_L, lts[15:0]);
    bus_write(REG_T3_LTS_H, {8'd0, lts[23:16]});
    bus_write(REG_CTRL, 16'h1 << CTRL_T3_START);
    while (!uc_irq) begin @(negedge clk80); cyc++; end
    bus_read(REG_STATUS, d);
    found = d[ST_T3_FOUND];
    chk(d[ST_T3_DONE] && !d[ST_T3_BUSY], "T3 status after the interrupt");
    bus_write(REG_CTRL, 16'h1 << CTRL_T3_ACK);
    @(negedge clk80);
    chk(!uc_irq, "interrupt cleared by ack");
  endtask

  // read the T3 buffer and check the 2048 samples of an event
  task automatic check_event(input int unsigned s_t1, input string name);
    logic [15:0] w [4];
    logic [63:0] smp;
    int unsigned s0 = 0;
    int bad = 0;
    for (int n = 0; n < 2048; n++) begin
      for (int q = 0; q < 4; q++) bus_read(T3_BUF_BASE + 15'(4 * n + q), w[q]);
      smp = {w[3], w[2], w[1], w[0]};
      if (n == 0) s0 = 32'(smp[28:0]);
      if (smp[28:0] != 29'(s0 + n) || smp[63:29] != hashbits(s0 + n)) bad++;
    end
    chk(bad == 0, $sformatf("%s: %0d samples not consecutive pattern samples", name, bad));
    $display("%s: first sample %0d, T1 edge at sample %0d, T1 bin at position %0d",
             name, s0, s_t1, s_t1 - s0);
    chk(s_t1 - s0 >= 500 && s_t1 - s0 <= 530,
        $sformatf("%s: T1 at position %0d of the event", name, s_t1 - s0));
  endtask

  // read a recalled event taken in test mode and look for the frame layout
  // of the pattern generator (64-cycle frames: 29-bit timestamp, 6-bit
  // channel number, zeros); exactly one frame phase must fit
  task automatic check_test_event();
    logic [15:0] w [4];
    logic [63:0] smp [2048];
    logic [28:0] ts, ts_prev;
    int fits = 0;
    for (int n = 0; n < 2048; n++) begin
      for (int q = 0; q < 4; q++) bus_read(T3_BUF_BASE + 15'(4 * n + q), w[q]);
      smp[n] = {w[3], w[2], w[1], w[0]};
    end
    for (int o = 0; o < 64; o++) begin
      bit ok;
      ok = 1;
      ts_prev = '0;
      for (int m = 0; ok && o + 64 * m + 63 < 2048; m++) begin
        int p;
        p = o + 64 * m;
        for (int b = 0; b < 29; b++) ts[28 - b] = smp[p + b][0];
        if (m > 0 && ts != ts_prev + 29'd64) ok = 0;
        ts_prev = ts;
        for (int c = 0; ok && c < 64; c++)
          for (int b = 0; b < 64; b++) begin
            logic e;
            if (b < 29)      e = ts[28 - b];
            else if (b < 35) e = c[5 - (b - 29)];
            else             e = 1'b0;
            if (smp[p + b][c] != e) ok = 0;
          end
      end
      if (ok) fits++;
    end
    chk(fits == 1, $sformatf("test-pattern frame phases that fit: %0d", fits));
    if (fits == 1) n_test++;
  endtask

  initial begin
    #(64'd400000000);        // 125 ms of simulated time in 0.3125 ns units: far beyond need
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] d;
    logic [11:0] tbl [80];
    int unsigned st1, st2, st3, st4;
    bit found;
    int cyc;
    int err0;
    foreach (ones[c]) ones[c] = 0;
    repeat (8) @(negedge clk80);
    rst = 0;
    @(negedge clk80) err0 = sram_errors;
    count_ones = 1;

    // 1. DAC programming
    for (int i = 0; i < 80; i++) begin
      tbl[i] = 12'($urandom);
      bus_write(REG_DAC_BASE + 15'(i), {4'd0, tbl[i]});
    end
    bus_read(REG_DAC_BASE + 15'd17, d);
    chk(d == {4'd0, tbl[17]}, "DAC table read-back");
    bus_write(REG_CTRL, 16'h1 << CTRL_DAC_START);
    do begin repeat (100) @(negedge clk80); bus_read(REG_STATUS, d); end while (d[ST_DAC_BUSY]);
    chk(n_dac_words == 80 && n_ldac == 1, $sformatf("%0d DAC words, %0d LDAC pulses", n_dac_words, n_ldac));
    chk(dac_sh == {4'd7, tbl[63]}, "last DAC word is DAC H of board 7");

    // 2. three T1 close together
    repeat (700) @(negedge clk80);
    st1 = scount; u_ls.send(24'h100001);
    repeat (700) @(negedge clk80);
    st2 = scount; u_ls.send(24'h100002);
    repeat (700) @(negedge clk80);
    st3 = scount; u_ls.send(24'h100003);
    bus_read(REG_LAST_LTS_L, d); chk(d == 16'h0003, "last LTS register");
    bus_read(REG_DROPPED, d);    chk(d == 16'd1, $sformatf("dropped T1s: %0d", d));
    wait_stored(2);
    n_events_stored = 2;

    // 3. recall the second event
    t3_request(24'h100002, found, cyc);
    chk(found, "event 2 found");
    if (found) n_found++;
    bus_read(REG_T3_POS, d); chk(d == 16'd1, $sformatf("event 2 at position %0d", d));
    chk(cyc >= 4096 * 6 && cyc <= 4096 * 6 + 60, $sformatf("recall took %0d cycles", cyc));
    check_event(st2, "event 2");

    // 4. new event written back while event 1 is recalled
    repeat (700) @(negedge clk80);
    st4 = scount;
    fork
      u_ls.send(24'h100004);
      begin
        repeat (250) @(negedge clk80);   // after the freeze of event 4
        t3_request(24'h100001, found, cyc);
      end
    join
    chk(found, "event 1 found");
    if (found) n_found++;
    bus_read(REG_T3_POS, d); chk(d == 16'd0, $sformatf("event 1 at position %0d", d));
    check_event(st1, "event 1");
    wait_stored(3);
    n_events_stored = 3;
    chk(u_sram.mem[{11'd2, 12'd0}][28:0] == 29'(st4 - 511) ||
        (st4 - u_sram.mem[{11'd2, 12'd0}][28:0]) inside {[500:530]},
        "event 4 stored in slot 2");

    // 5. not found
    t3_request(24'h0BAD00, found, cyc);
    chk(!found, "absent LTS reported as not found");
    if (!found) n_notfound++;

    // 6. calibration counters
    @(negedge clk80);
    bus_write(REG_CTRL, 16'h1 << CTRL_CAL_LATCH);
    n_cal++;
    begin
      longint tb_ones [64];
      logic [15:0] lo, hi;
      logic [63:0] t;
      tb_ones = ones;
      for (int c = 0; c < 64; c += 9) begin
        bus_read(REG_CAL_BASE + 15'(2 * c), lo);
        bus_read(REG_CAL_BASE + 15'(2 * c + 1), hi);
        // latched about 6 cycles before this point (bus synchronizer), and
        // the front end lags by up to 3 words; its latch is not reset, so
        // the first word after reset may add up to 4 samples
        chk(tb_ones[c] - longint'({hi, lo}) >= -4 && tb_ones[c] - longint'({hi, lo}) <= 64,
            $sformatf("channel %0d: %0d positive samples, pattern had %0d", c, {hi, lo}, tb_ones[c]));
      end
      for (int w = 0; w < 4; w++) begin
        bus_read(REG_TIME_BASE + 15'(w), lo);
        t[16*w +: 16] = lo;
      end
      chk(t > 0 && longint'(t) <= longint'(scount / 4) && longint'(scount / 4) - longint'(t) < 200,
          $sformatf("time counter %0d, %0d cycles since reset", t, scount / 4));
    end

    // 7. test pattern
    bus_write(REG_TEST, 16'h0001);
    repeat (700) @(negedge clk80);
    u_ls.send(24'h100005);
    wait_stored(4);
    bus_write(REG_TEST, 16'h0000);
    t3_request(24'h100005, found, cyc);
    chk(found, "test event found");
    if (found) check_test_event();

    chk(sram_errors == err0, "SRAM protocol errors");
    // every mechanism happened
    chk(n_switch >= 2, $sformatf("buffer switches: %0d", n_switch));
    chk(n_pause >= 1, $sformatf("acquisition pauses: %0d", n_pause));
    chk(n_drop >= 1, $sformatf("dropped T1s: %0d", n_drop));
    chk(n_found == 2, $sformatf("T3 found: %0d", n_found));
    chk(n_notfound == 1, $sformatf("T3 not found: %0d", n_notfound));
    chk(n_contend >= 1, $sformatf("memory contention: %0d", n_contend));
    chk(n_dac_words == 80 && n_ldac == 1, "DAC programming");
    chk(n_cal == 1 && n_events_stored == 3, "calibration latch and event storage");
    chk(n_test == 1, $sformatf("test-pattern events checked: %0d", n_test));
    $display("mechanisms: switch=%0d pause=%0d drop=%0d found=%0d notfound=%0d contend=%0d dac_words=%0d ldac=%0d cal=%0d stored=%0d test=%0d",
             n_switch, n_pause, n_drop, n_found, n_notfound, n_contend, n_dac_words, n_ldac, n_cal, n_events_stored, n_test);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
