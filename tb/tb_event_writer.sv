// tb_event_writer: offers frozen events (random buffer, first word and LTS)
// to the writer, with the real SRAM controller and a behavioural SRAM as
// its memory, and checks: every external word {index, k} holds buffer word
// (start*8 + k) mod 4096 of the right buffer, the LTS lands in the timestamp
// table at the index, the buffer is released once after the copy, the index
// and the stored count advance, and one event takes 4096 x 6 cycles
// (307.2 us at 80 MHz).
module tb_event_writer;
  import amiga_pkg::*;
  logic clk = 0, rst = 1;
  event_desc_t ev;
  logic release_buf;
  logic [12:0] raddr;
  logic [31:0] rdata;
  mem_req_t req, idle_req;
  mem_rsp_t rsp, idle_rsp;
  logic ts_we;
  logic [10:0] ts_waddr, wr_idx;
  logic [23:0] ts_wdata;
  logic [11:0] stored;
  logic busy;
  logic [22:0] sram_addr;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  int sram_errors;
  logic [23:0] ts_seen [2048];
  int ts_writes = 0, releases = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // behavioural circular-buffer read port: word value derived from address
  function automatic logic [31:0] bufword(logic [12:0] a);
    return {3'b101, a, 16'(a * 16'd40503)};
  endfunction
  always @(posedge clk) rdata <= bufword(raddr);

  event_writer dut (.clk, .rst, .ev, .release_buf, .raddr, .rdata, .mem_req(req),
    .mem_rsp(rsp), .ts_we, .ts_waddr, .ts_wdata, .wr_idx, .stored, .busy);
  assign idle_req = '0;
  ext_mem_ctrl u_mem (.clk, .rst, .c0_req(req), .c0_rsp(rsp), .c1_req(idle_req),
    .c1_rsp(idle_rsp), .sram_addr, .sram_dq_o, .sram_dq_i, .sram_dq_oe,
    .sram_ce_n, .sram_oe_n, .sram_we_n);
  sram_model u_sram (.addr(sram_addr), .dq_in(sram_dq_o), .dq_oe(sram_dq_oe),
    .dq_out(sram_dq_i), .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n),
    .errors(sram_errors));

  always @(negedge clk) if (!rst) begin
    if (ts_we) begin ts_seen[ts_waddr] = ts_wdata; ts_writes++; end
    if (release_buf) releases++;
  end

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

  initial begin
    longint t0, cyc;
    int bad;
    ev = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 4; e++) begin
      logic [10:0] idx;
      idx = wr_idx;
      @(negedge clk);
      ev.valid = 1; ev.buf_sel = 1'($urandom); ev.start = 9'($urandom); ev.lts = 24'($urandom);
      t0 = $time;
      while (!release_buf) @(negedge clk);
      cyc = ($time - t0) / 10;
      ev.valid = 0;
      chk(cyc >= 4096 * 6 && cyc <= 4096 * 6 + 12, $sformatf("event copy took %0d cycles", cyc));
      @(negedge clk);
      chk(releases == e + 1, $sformatf("%0d releases", releases));
      chk(ts_writes == e + 1 && ts_seen[idx] == ev.lts, "timestamp table write");
      chk(wr_idx == idx + 1, "index advances");
      chk(stored == 12'(e + 1), $sformatf("stored = %0d", stored));
      bad = 0;
      for (int k = 0; k < 4096; k++) begin
        logic [12:0] a;
        a = {ev.buf_sel, 9'(ev.start + 9'(k / 8)), 3'(k % 8)};
        if (u_sram.mem[{idx, 12'(k)}] != bufword(a)) bad++;
      end
      chk(bad == 0, $sformatf("event %0d: %0d wrong words in external RAM", e, bad));
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
