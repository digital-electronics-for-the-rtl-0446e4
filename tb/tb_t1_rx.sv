// tb_t1_rx: sends T1 frames with random timestamps and random phase to the
// receiver and checks the trigger pulse (one per frame, 3 cycles after the
// edge), the received LTS, that the frame's data bits never give a second
// trigger, and that the LTS is complete within the 2.9 us frame.
module tb_t1_rx;
  logic clk = 0, rst = 1;
  logic line;
  logic t1_pulse, lts_valid;
  logic [23:0] lts;
  int checks = 0, failures = 0;
  int npulse = 0, nvalid = 0;
  longint cyc = 0, edge_cyc, pulse_cyc, valid_cyc;

  always #50 clk = ~clk;          // 80 MHz: 100 units per cycle = 12.5 ns
  always @(posedge clk) cyc++;

  ls_t1_tx #(.UNITS_PER_100NS(800)) u_tx (.line);
  t1_rx dut (.clk, .rst, .t1_line(line), .t1_pulse, .lts, .lts_valid);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    if (t1_pulse)  begin npulse++; pulse_cyc = cyc; end
    if (lts_valid) begin nvalid++; valid_cyc = cyc; end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] v;
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      v = (n == 0) ? 24'hFFFFFF : (n == 1) ? 24'h800001 : 24'($urandom);
      #($urandom_range(0, 99));      // random phase against the clock
      edge_cyc = cyc;
      npulse = 0; nvalid = 0;
      u_tx.send(v);
      // wait to the end of the 2.9 us frame (232 cycles) and a bit more
      repeat (232 - 200 + 10) @(posedge clk);
      chk(npulse == 1, $sformatf("frame %0d: %0d trigger pulses", n, npulse));
      chk(nvalid == 1, $sformatf("frame %0d: %0d lts_valid", n, nvalid));
      chk(lts == v, $sformatf("frame %0d: lts %h expected %h", n, lts, v));
      chk(pulse_cyc - edge_cyc >= 3 && pulse_cyc - edge_cyc <= 4,
          $sformatf("frame %0d: trigger latency %0d cycles", n, pulse_cyc - edge_cyc));
      chk(valid_cyc - edge_cyc <= 232 + 4,
          $sformatf("frame %0d: LTS after %0d cycles", n, valid_cyc - edge_cyc));
      repeat ($urandom_range(1, 30)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
