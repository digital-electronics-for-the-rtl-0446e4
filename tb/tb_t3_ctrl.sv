// tb_t3_ctrl: fills a timestamp table model and the behavioural SRAM with
// random events, then issues T3 requests. Checks: a stored LTS is found at
// its index and the newest copy wins when an LTS appears twice; entries
// beyond the stored count are not searched; the 4096 words land in the T3
// buffer in order from {pos, 0}; an absent LTS ends with found clear after
// at most stored + 3 cycles; the read takes 4096 x 6 cycles; done holds
// until ack.
module tb_t3_ctrl;
  import amiga_pkg::*;
  logic clk = 0, rst = 1;
  logic start = 0, ack = 0;
  logic [23:0] lts = '0;
  logic [11:0] stored = '0;
  logic [10:0] wr_idx = '0, ts_raddr, pos;
  logic [23:0] ts_rdata;
  mem_req_t req, idle_req;
  mem_rsp_t rsp, idle_rsp;
  logic buf_we;
  logic [11:0] buf_waddr;
  logic [31:0] buf_wdata;
  logic busy, done, found;
  logic [22:0] sram_addr;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  int sram_errors;
  logic [23:0] table_m [2048];
  logic [31:0] t3buf [4096];
  int nbuf = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) ts_rdata <= table_m[ts_raddr];
  always @(negedge clk) if (buf_we) begin t3buf[buf_waddr] = buf_wdata; nbuf++; end

  t3_ctrl dut (.clk, .rst, .start, .ack, .lts, .stored, .wr_idx, .ts_raddr, .ts_rdata,
    .mem_req(req), .mem_rsp(rsp), .buf_we, .buf_waddr, .buf_wdata, .busy, .done,
    .found, .pos);
  assign idle_req = '0;
  ext_mem_ctrl u_mem (.clk, .rst, .c0_req(idle_req), .c0_rsp(idle_rsp), .c1_req(req),
    .c1_rsp(rsp), .sram_addr, .sram_dq_o, .sram_dq_i, .sram_dq_oe,
    .sram_ce_n, .sram_oe_n, .sram_we_n);
  sram_model u_sram (.addr(sram_addr), .dq_in(sram_dq_o), .dq_oe(sram_dq_oe),
    .dq_out(sram_dq_i), .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n),
    .errors(sram_errors));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one request; returns cycles from start to done
  task automatic request(input logic [23:0] v, output longint cyc);
    longint t0;
    nbuf = 0;
    @(negedge clk) lts = v; start = 1;
    t0 = $time;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
  endtask

  task automatic check_found(input logic [10:0] p, input longint cyc, input longint max_search);
    int bad = 0;
    chk(found && pos == p, $sformatf("found=%0d pos=%0d expected %0d", found, pos, p));
    chk(nbuf == 4096, $sformatf("%0d words into the T3 buffer", nbuf));
    for (int k = 0; k < 4096; k++)
      if (t3buf[k] != u_sram.mem[{p, 12'(k)}]) bad++;
    chk(bad == 0, $sformatf("%0d wrong words in the T3 buffer", bad));
    chk(cyc >= 4096 * 6 && cyc <= 4096 * 6 + max_search + 12,
        $sformatf("recall took %0d cycles", cyc));
  endtask

  initial begin
    longint cyc;
    int err0;
    // distinct random LTS values, events in slots 0..1499, ring wrapped once
    for (int i = 0; i < 2048; i++) table_m[i] = {1'b0, 12'(i), 11'($urandom)};
    table_m[700] = 24'hF00001;   // duplicate LTS: slot 1200 is newer
    table_m[1200] = 24'hF00001;
    table_m[1700] = 24'hF00002;  // beyond the stored slots
    for (int p = 0; p < 2048; p += 100)
      for (int k = 0; k < 4096; k++) u_sram.mem[{11'(p), 12'(k)}] = $urandom;
    for (int k = 0; k < 4096; k++) u_sram.mem[{11'd1200, 12'(k)}] = $urandom;
    for (int k = 0; k < 4096; k++) u_sram.mem[{11'd1499, 12'(k)}] = $urandom;
    stored = 12'd1500; wr_idx = 11'd1500;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk) err0 = sram_errors;
    // 1. found, newest entry (search starts at wr_idx - 1)
    request(table_m[1499], cyc);
    check_found(11'd1499, cyc, 4);
    chk(done, "done holds");
    @(negedge clk) ack = 1;
    @(negedge clk) ack = 0;
    chk(!done, "ack clears done");
    // 2. found deep in the table
    request(table_m[300], cyc);
    check_found(11'd300, cyc, 1500 - 300 + 4);
    // 3. duplicate: newest copy
    request(24'hF00001, cyc);
    check_found(11'd1200, cyc, 1500 - 1200 + 4);
    // 4. not found: value absent, and a value only in an unused slot
    request(24'hFFFFFF, cyc);
    chk(!found && cyc <= 1500 + 4, $sformatf("not found: found=%0d after %0d cycles", found, cyc));
    chk(nbuf == 0, "no data read when not found");
    request(24'hF00002, cyc);
    chk(!found, "slot beyond the stored count searched");
    // 5. full ring, index wrapped: newest is 99, slot 100 is the oldest
    stored = 12'd2048; wr_idx = 11'd100;
    request(table_m[100], cyc);
    check_found(11'd100, cyc, 2048 + 4);
    request(table_m[0], cyc);
    check_found(11'd0, cyc, 100 + 4);
    chk(sram_errors == err0, "SRAM protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
