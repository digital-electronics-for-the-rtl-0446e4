// tb_t3_buffer: fills the buffer with 32-bit words and reads all of it as
// 16-bit words, low half first, checking the one-cycle read latency.
module tb_t3_buffer;
  logic clk = 0, we = 0;
  logic [11:0] waddr = '0;
  logic [31:0] wdata = '0;
  logic [12:0] raddr = '0;
  logic [15:0] rdata;
  logic [31:0] model [4096];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  t3_buffer dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

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
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk);
      we = 1; waddr = 12'(i); wdata = $urandom;
      model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 8192; i++) begin
      @(negedge clk) raddr = 13'(i);
      @(posedge clk); #1;
      chk(rdata == model[i/2][16*(i%2) +: 16], $sformatf("word %0d: %h", i, rdata));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
