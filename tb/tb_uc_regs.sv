// tb_uc_regs: acts as the microcontroller on the asynchronous bus. Checks
// the reset values, write and read-back of the configuration registers,
// that each execution bit gives exactly one one-cycle pulse, the status
// bits, DAC-table writes and reads, the latched calibration words, the
// T3-buffer window, and that unused addresses read zero.
module tb_uc_regs;
  import amiga_pkg::*;
  logic clk = 0, rst = 1;
  logic [14:0] uc_addr = '0;
  logic [15:0] uc_din = '0, uc_dout;
  logic uc_dout_oe, uc_cs_n = 1, uc_we_n = 1, uc_oe_n = 1;
  logic [11:0] post_t1, delay;
  logic        test_mode;
  logic [23:0] t3_lts;
  logic dac_start, cal_latch, t3_start, t3_ack;
  logic dac_tbl_we;
  logic [6:0] dac_tbl_waddr, dac_tbl_raddr;
  logic [11:0] dac_tbl_wdata, dac_tbl_rdata;
  logic [12:0] t3buf_raddr;
  logic [15:0] t3buf_rdata;
  logic dac_busy = 0, t3_busy = 0, t3_done = 0, t3_found = 0, acquiring = 0, wb_busy = 0;
  logic [10:0] t3_pos = '0;
  logic [11:0] stored = '0;
  logic [23:0] last_lts = '0;
  logic [15:0] dropped = '0;
  logic [63:0][31:0] cal_acc;
  logic [63:0] cal_time;
  logic [11:0] dac_m [128];
  int n_dac_start = 0, n_cal_latch = 0, n_t3_start = 0, n_t3_ack = 0, n_tbl_we = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  uc_regs dut (.clk, .rst, .uc_addr, .uc_din, .uc_dout, .uc_dout_oe, .uc_cs_n, .uc_we_n,
    .uc_oe_n, .post_t1, .delay, .test_mode, .t3_lts, .dac_start, .cal_latch, .t3_start, .t3_ack,
    .dac_tbl_we, .dac_tbl_waddr, .dac_tbl_wdata, .dac_tbl_raddr, .dac_tbl_rdata,
    .t3buf_raddr, .t3buf_rdata, .dac_busy, .t3_busy, .t3_done, .t3_found, .acquiring,
    .wb_busy, .t3_pos, .stored, .last_lts, .dropped, .cal_acc, .cal_time);

  // models of the DAC table and T3 buffer read ports (one cycle)
  always @(posedge clk) begin
    if (dac_tbl_we) dac_m[dac_tbl_waddr] <= dac_tbl_wdata;
    dac_tbl_rdata <= dac_m[dac_tbl_raddr];
    t3buf_rdata   <= 16'(t3buf_raddr * 13'd37 + 13'd5);
  end
  always @(negedge clk) if (!rst) begin
    n_dac_start += dac_start; n_cal_latch += cal_latch;
    n_t3_start += t3_start;   n_t3_ack += t3_ack;
    n_tbl_we += dac_tbl_we;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic bus_write(input logic [14:0] a, input logic [15:0] d);
    @(negedge clk);
    uc_addr = a; uc_din = d; uc_cs_n = 0;
    @(negedge clk) uc_we_n = 0;
    repeat (5) @(negedge clk);
    uc_we_n = 1;
    @(negedge clk) uc_cs_n = 1;
    repeat (3) @(negedge clk);
  endtask

  task automatic bus_read(input logic [14:0] a, output logic [15:0] d);
    @(negedge clk);
    uc_addr = a; uc_cs_n = 0; uc_oe_n = 0;
    repeat (4) @(negedge clk);
    chk(uc_dout_oe, "output enabled during a read");
    d = uc_dout;
    uc_oe_n = 1; uc_cs_n = 1;
    @(negedge clk);
    chk(!uc_dout_oe, "output released after a read");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] d;
    for (int c = 0; c < 64; c++) cal_acc[c] = $urandom;
    cal_time = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst = 0;
    bus_read(REG_POST_T1, d); chk(d == 16'd1536, $sformatf("POST_T1 reset %0d", d));
    bus_read(REG_DELAY, d);   chk(d == 16'd0, "DELAY reset");
    bus_write(REG_POST_T1, 16'd1000); bus_read(REG_POST_T1, d);
    chk(d == 16'd1000 && post_t1 == 12'd1000, "POST_T1 write");
    bus_write(REG_DELAY, 16'd24); bus_read(REG_DELAY, d);
    chk(d == 16'd24 && delay == 12'd24, "DELAY write");
    chk(!test_mode, "test mode off after reset");
    bus_write(REG_TEST, 16'h0001); bus_read(REG_TEST, d);
    chk(d == 16'h0001 && test_mode, "TEST write");
    bus_write(REG_TEST, 16'h0000);
    chk(!test_mode, "TEST cleared");
    bus_write(REG_T3_LTS_L, 16'h5678); bus_write(REG_T3_LTS_H, 16'h0034);
    chk(t3_lts == 24'h345678, $sformatf("T3 LTS %h", t3_lts));
    bus_read(REG_T3_LTS_H, d); chk(d == 16'h0034, "T3 LTS high read");
    // execution bits
    bus_write(REG_CTRL, 16'h0001 << CTRL_DAC_START);
    bus_write(REG_CTRL, 16'h0001 << CTRL_CAL_LATCH);
    bus_write(REG_CTRL, 16'h0001 << CTRL_T3_START);
    bus_write(REG_CTRL, 16'h0001 << CTRL_T3_ACK);
    bus_write(REG_CTRL, (16'h0001 << CTRL_T3_START) | (16'h0001 << CTRL_DAC_START));
    chk(n_dac_start == 2 && n_cal_latch == 1 && n_t3_start == 2 && n_t3_ack == 1,
        $sformatf("pulses %0d %0d %0d %0d", n_dac_start, n_cal_latch, n_t3_start, n_t3_ack));
    // status
    dac_busy = 1; t3_done = 1; t3_found = 1; t3_busy = 0; acquiring = 1; wb_busy = 0;
    bus_read(REG_STATUS, d); chk(d == 16'b01_1101, $sformatf("status %b", d));
    t3_pos = 11'd1234; stored = 12'd2048; last_lts = 24'hABCDEF; dropped = 16'd7;
    bus_read(REG_T3_POS, d);     chk(d == 16'd1234, "T3 position");
    bus_read(REG_STORED, d);     chk(d == 16'd2048, "stored");
    bus_read(REG_LAST_LTS_L, d); chk(d == 16'hCDEF, "last LTS low");
    bus_read(REG_LAST_LTS_H, d); chk(d == 16'h00AB, "last LTS high");
    bus_read(REG_DROPPED, d);    chk(d == 16'd7, "dropped");
    // DAC table
    for (int i = 0; i < 80; i += 7) bus_write(REG_DAC_BASE + 15'(i), 16'(i * 50 + 3));
    chk(n_tbl_we == 12, $sformatf("%0d table writes", n_tbl_we));
    for (int i = 0; i < 80; i += 7) begin
      bus_read(REG_DAC_BASE + 15'(i), d);
      chk(d == 16'(i * 50 + 3), $sformatf("DAC table %0d: %0d", i, d));
    end
    bus_write(REG_DAC_BASE + 15'd80, 16'h1);
    chk(n_tbl_we == 12, "write past the DAC table accepted");
    // calibration counters and time
    for (int c = 0; c < 64; c += 5) begin
      bus_read(REG_CAL_BASE + 15'(2 * c), d);     chk(d == cal_acc[c][15:0], $sformatf("cal %0d low", c));
      bus_read(REG_CAL_BASE + 15'(2 * c + 1), d); chk(d == cal_acc[c][31:16], $sformatf("cal %0d high", c));
    end
    for (int w = 0; w < 4; w++) begin
      bus_read(REG_TIME_BASE + 15'(w), d); chk(d == cal_time[16*w +: 16], $sformatf("time word %0d", w));
    end
    // T3 buffer window
    for (int i = 0; i < 8192; i += 613) begin
      bus_read(T3_BUF_BASE + 15'(i), d);
      chk(d == 16'(13'(i) * 13'd37 + 13'd5), $sformatf("T3 buffer word %0d: %h", i, d));
    end
    // unused addresses
    bus_read(15'h0060, d); chk(d == 0, "unused address 0x0060");
    bus_read(15'h2000, d); chk(d == 0, "unused address 0x2000");
    bus_read(15'h7000, d); chk(d == 0, "unused address 0x7000");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
