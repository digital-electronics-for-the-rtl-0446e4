// tb_dp_ram_asym: writes random 256-bit words, reads them back as 32-bit
// slices through the narrow port, with writes and reads interleaved, and
// checks data, slice order and the one-cycle read latency.
module tb_dp_ram_asym;
  logic clk = 0;
  logic we = 0;
  logic [9:0]  waddr = '0;
  logic [255:0] wdata = '0;
  logic [12:0] raddr = '0;
  logic [31:0] rdata;
  logic [255:0] model [1024];
  bit           written [1024];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dp_ram_asym dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

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
    logic [12:0] ra;
    // fill all words
    for (int w = 0; w < 1024; w++) begin
      @(negedge clk);
      we = 1; waddr = 10'(w);
      wdata = {8{$urandom}};
      model[w] = wdata; written[w] = 1;
    end
    @(negedge clk) we = 0;
    // random reads, with random writes on the other port in the same cycles
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      ra = 13'($urandom);
      raddr = ra;
      we = ($urandom_range(0, 3) == 0);
      waddr = 10'($urandom);
      if (waddr == ra[12:3]) we = 0;   // no read-during-write of the same word
      wdata = {8{$urandom}};
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      chk(rdata == model[ra[12:3]][32*ra[2:0] +: 32],
          $sformatf("read %h: %h expected %h", ra, rdata, model[ra[12:3]][32*ra[2:0] +: 32]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
