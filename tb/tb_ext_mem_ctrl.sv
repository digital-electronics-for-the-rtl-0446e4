// tb_ext_mem_ctrl: two clients drive the SRAM controller against a
// behavioural SRAM. Client 0 writes blocks of random words, client 1 reads
// them back; checked are the data, the 6-cycle (75 ns) word time with
// back-to-back transfers, the priority of client 0 when both request, that
// each transfer gets exactly one done pulse on the right client, and the
// SRAM protocol (no overlap of WR# and RD#, WR# inside CE#).
module tb_ext_mem_ctrl;
  import amiga_pkg::*;
  logic clk = 0, rst = 1;
  mem_req_t c0_req, c1_req;
  mem_rsp_t c0_rsp, c1_rsp;
  logic [22:0] sram_addr;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  int sram_errors;
  int checks = 0, failures = 0;
  logic [31:0] model [logic [22:0]];
  int c0_done = 0, c1_done = 0, both_req = 0, both_c0_first = 0;

  always #5 clk = ~clk;
  ext_mem_ctrl dut (.clk, .rst, .c0_req, .c0_rsp, .c1_req, .c1_rsp, .sram_addr,
    .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n);
  sram_model u_sram (.addr(sram_addr), .dq_in(sram_dq_o), .dq_oe(sram_dq_oe),
    .dq_out(sram_dq_i), .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n),
    .errors(sram_errors));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (!rst) begin
    if (c0_rsp.rvalid) c0_done++;
    if (c1_rsp.rvalid) c1_done++;
    if (c0_rsp.rvalid || c1_rsp.rvalid) chk(!(c0_rsp.rvalid && c1_rsp.rvalid), "done on both clients");
    if (c0_req.req && c1_req.req && (c0_rsp.gnt || c1_rsp.gnt)) begin
      both_req++;
      chk(c0_rsp.gnt && !c1_rsp.gnt, "client 0 must win when both request");
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write a block of n words from base; returns cycles from first request to last done
  task automatic write_block(input logic [22:0] base, input int n, output longint cycles);
    longint t0;
    int d0;
    t0 = $time;
    d0 = c0_done;
    for (int i = 0; i < n; i++) begin
      c0_req.req = 1; c0_req.we = 1; c0_req.addr = base + 23'(i); c0_req.wdata = $urandom;
      model[c0_req.addr] = c0_req.wdata;
      #1;
      while (!c0_rsp.gnt) begin @(negedge clk); #1; end
      @(negedge clk);                 // accepted at the posedge in between
    end
    c0_req.req = 0;
    while (c0_done != d0 + n) @(negedge clk);
    cycles = ($time - t0) / 10;
  endtask

  initial begin
    longint cyc;
    int err0;
    c0_req = '0; c1_req = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    err0 = sram_errors;
    // 1. back-to-back writes: 6 cycles per word
    write_block(23'h000100, 1000, cyc);
    chk(cyc >= 6000 && cyc <= 6003, $sformatf("1000 writes took %0d cycles", cyc));
    // 2. client 1 reads them back while client 0 writes another block
    fork
      begin
        write_block(23'h400000, 300, cyc);
      end
      begin
        for (int i = 0; i < 1000; i++) begin
          c1_req.req = 1; c1_req.we = 0; c1_req.addr = 23'h000100 + 23'(i);
          #1;
          while (!c1_rsp.gnt) begin @(negedge clk); #1; end
          @(negedge clk);
          c1_req.req = 0;
          #1;
          while (!c1_rsp.rvalid) begin @(negedge clk); #1; end
          chk(c1_rsp.rdata == model[23'h000100 + 23'(i)],
              $sformatf("read %0d: %h expected %h", i, c1_rsp.rdata, model[23'h000100 + 23'(i)]));
          #1;
        end
      end
    join
    // 3. back-to-back reads on client 1 alone: 6 cycles per word
    begin
      longint t0;
      int d1;
      t0 = $time;
      d1 = c1_done;
      for (int i = 0; i < 300; i++) begin
        c1_req.req = 1; c1_req.we = 0; c1_req.addr = 23'h400000 + 23'(i);
        #1;
        while (!c1_rsp.gnt) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      c1_req.req = 0;
      while (c1_done != d1 + 300) @(negedge clk);
      cyc = ($time - t0) / 10;
      chk(cyc >= 1800 && cyc <= 1803, $sformatf("300 reads took %0d cycles", cyc));
    end
    chk(both_req > 100, $sformatf("only %0d contended grants", both_req));
    chk(c0_done == 1300, $sformatf("client 0 done count %0d", c0_done));
    chk(c1_done == 1300, $sformatf("client 1 done count %0d", c1_done));
    chk(sram_errors == err0, $sformatf("%0d SRAM protocol errors", sram_errors - err0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
