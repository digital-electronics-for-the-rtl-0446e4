// tb_ts_table: writes the 2048 entries, overwrites some (ring reuse), reads
// every entry back and checks data and the one-cycle read latency.
module tb_ts_table;
  logic clk = 0, we = 0;
  logic [10:0] waddr = '0, raddr = '0;
  logic [23:0] wdata = '0, rdata;
  logic [23:0] model [2048];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  ts_table dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2048 + 300; i++) begin
      @(negedge clk);
      we = 1; waddr = 11'(i); wdata = 24'($urandom);
      model[waddr] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk) raddr = 11'(i);
      @(posedge clk); #1;
      chk(rdata == model[i], $sformatf("entry %0d: %h expected %h", i, rdata, model[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
