// tb_front_end: drives random samples on all 64 lines at 320 MHz and checks
// every 80 MHz output word: each must hold four consecutive samples of every
// channel, oldest in slot 0, whole groups of four in a fixed alignment, with
// a latency of at most three 80 MHz cycles.
module tb_front_end;
  localparam int N = 64;
  logic clk320 = 0, clk80 = 0, rst = 1;
  logic [N-1:0] din;
  logic [4*N-1:0] dout;
  int checks = 0, failures = 0;
  logic [N-1:0] hist [$];     // hist[s]: sample taken at clk320 edge s
  int e320 = 0;
  int offset = -1;

  front_end dut (.clk320, .clk80, .rst, .din, .dout);

  // in-phase clocks: clk80 rises with every fourth clk320 rise
  initial begin
    forever begin
      for (int i = 0; i < 4; i++) begin
        #5 clk320 = 1; if (i == 0) clk80 = 1;
        #5 clk320 = 0; if (i == 2) clk80 = 0;
      end
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // new sample after each clk320 edge, record what the edge took
  always @(posedge clk320) begin
    hist.push_back(din);
    e320++;
    #1 din = {$urandom, $urandom};
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nw = 0;
    din = '0;
    repeat (3) @(posedge clk80);
    rst = 0;
    repeat (3) @(posedge clk80);
    while (nw < 2000) begin
      @(posedge clk80);
      #2;
      // e320 edges so far; hist[e320-1] is the sample taken at this edge
      if (nw < 10) begin
        // let the pipeline fill
      end else if (offset < 0) begin
        for (int d = 0; d < 16; d++) begin
          bit ok;
          ok = 1;
          for (int k = 0; k < 4; k++)
            for (int c = 0; c < N; c++)
              if (dout[N*k + c] !== hist[e320 - 1 - d - 3 + k][c]) ok = 0;
          if (ok && offset < 0) offset = d;
        end
        chk(offset >= 0 && offset <= 8, $sformatf("alignment not found or latency too long (%0d)", offset));
        if (offset < 0) offset = 0;
      end else begin
        bit ok;
          ok = 1;
        for (int k = 0; k < 4; k++)
          for (int c = 0; c < N; c++)
            if (dout[N*k + c] !== hist[e320 - 1 - offset - 3 + k][c]) ok = 0;
        chk(ok, $sformatf("word %0d differs from the sample history", nw));
      end
      nw++;
    end
    $display("alignment: newest sample of a word is %0d clk320 cycles old", offset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
