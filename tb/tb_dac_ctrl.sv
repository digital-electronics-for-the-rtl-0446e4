// tb_dac_ctrl: loads a random table of 80 registers, starts programming and
// decodes the SPI lines like eight TLV5630 DACs would (frame on FS low, DIN
// taken on the SCLK falling edge, 16 bits). Checks every word's board,
// register address and value, the order, that FS never selects two boards,
// that LDAC# pulses once after the last word, the table read-back and the
// duration.
module tb_dac_ctrl;
  logic clk = 0, rst = 1;
  logic tbl_we = 0;
  logic [6:0] tbl_waddr = '0, tbl_raddr = '0;
  logic [11:0] tbl_wdata = '0, tbl_rdata;
  logic start = 0, busy, done, sclk, din, ldac_n;
  logic [7:0] fs_n;
  logic [11:0] tbl [80];
  int checks = 0, failures = 0;
  int nword = 0, nldac = 0, nbits = 0;
  logic [15:0] sh;
  int cur_board;
  bit ldac_seen_early = 0;

  always #5 clk = ~clk;
  dac_ctrl dut (.clk, .rst, .tbl_we, .tbl_waddr, .tbl_wdata, .tbl_raddr, .tbl_rdata,
                .start, .busy, .done, .sclk, .din, .fs_n, .ldac_n);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // expected word number n: board n/10, k = n%10 (CTRL0, CTRL1, A..H)
  function automatic logic [15:0] expect_word(int n);
    int b = n / 10, k = n % 10;
    if (k < 2) return {4'(8 + k), tbl[64 + 2*b + k]};
    return {4'(k - 2), tbl[8*b + k - 2]};
  endfunction

  // DAC side
  always @(negedge fs_n[0] or negedge fs_n[1] or negedge fs_n[2] or negedge fs_n[3] or
           negedge fs_n[4] or negedge fs_n[5] or negedge fs_n[6] or negedge fs_n[7]) begin
    nbits = 0;
    cur_board = -1;
    for (int b = 0; b < 8; b++) if (!fs_n[b]) cur_board = b;
  end
  always @(negedge sclk) if (fs_n != 8'hFF) begin
    sh = {sh[14:0], din};
    nbits++;
    if (nbits == 16) begin
      chk(cur_board == nword / 10, $sformatf("word %0d went to board %0d", nword, cur_board));
      chk(sh == expect_word(nword), $sformatf("word %0d: %h expected %h", nword, sh, expect_word(nword)));
      nword++;
    end
  end
  always @(posedge fs_n[0] or posedge fs_n[1] or posedge fs_n[2] or posedge fs_n[3] or
           posedge fs_n[4] or posedge fs_n[5] or posedge fs_n[6] or posedge fs_n[7])
    if (!rst) chk(nbits == 16, $sformatf("frame ended after %0d bits", nbits));
  always @(negedge ldac_n) begin
    nldac++;
    if (nword != 80) ldac_seen_early = 1;
  end
  always @(posedge clk) if (!rst) chk($countones(~fs_n) <= 1, "two DACs selected");

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 80; i++) begin
      @(negedge clk);
      tbl_we = 1; tbl_waddr = 7'(i); tbl_wdata = 12'($urandom);
      tbl[i] = tbl_wdata;
    end
    @(negedge clk) tbl_we = 0;
    for (int i = 0; i < 80; i++) begin
      @(negedge clk) tbl_raddr = 7'(i);
      @(posedge clk); #1;
      chk(tbl_rdata == tbl[i], $sformatf("table read-back %0d", i));
    end
    for (int run = 0; run < 2; run++) begin
      nword = 0; nldac = 0;
      @(negedge clk) start = 1;
      t0 = $time;
      @(negedge clk) start = 0;
      chk(busy, "busy after start");
      wait (done);
      t1 = $time;
      @(negedge clk);
      chk(nword == 80, $sformatf("%0d words sent", nword));
      chk(nldac == 1 && !ldac_seen_early, "LDAC# pulsed once after the last word");
      chk(!busy, "idle after done");
      // 80 words x 33 half SCLK periods of 4 clocks, plus the LDAC# pulse
      chk((t1 - t0) / 10 >= 80 * 33 * 4 + 4 && (t1 - t0) / 10 <= 80 * 33 * 4 + 8,
          $sformatf("programming took %0d cycles", (t1 - t0) / 10));
      // change the table for the second run
      for (int i = 0; i < 80; i++) begin
        @(negedge clk);
        tbl_we = 1; tbl_waddr = 7'(i); tbl_wdata = 12'($urandom);
        tbl[i] = tbl_wdata;
      end
      @(negedge clk) tbl_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
