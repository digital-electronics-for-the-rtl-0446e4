// tb_pattern_gen: checks the test-pattern generator frame by frame.
//
// After reset the testbench counts 320 MHz cycles itself. For each of 40
// frames it collects the FRAME bits of every line and checks that the
// first 29 are the cycle count at the start of the frame (MSB first), the
// next 6 the line's channel number and the rest zero.
module tb_pattern_gen;
  localparam int FRAME = 64;
  logic clk320 = 0, rst = 1;
  logic [63:0] pat;
  int checks = 0, failures = 0;

  pattern_gen dut (.clk320, .rst, .pat);

  always #5 clk320 = ~clk320;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [FRAME-1:0] fr [64];
    logic [FRAME-1:0] exp_fr;
    int unsigned t;
    repeat (3) @(negedge clk320);
    rst = 0;
    // pat is registered: the bit for cycle t appears one cycle later
    @(negedge clk320);
    t = 0;
    for (int f = 0; f < 40; f++) begin
      for (int b = 0; b < FRAME; b++) begin
        for (int c = 0; c < 64; c++) fr[c][FRAME-1-b] = pat[c];
        @(negedge clk320);
      end
      for (int c = 0; c < 64; c++) begin
        exp_fr = {29'(t), 6'(c), 29'd0};
        checks++;
        if (fr[c] != exp_fr) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d line %0d: %h, expected %h", f, c, fr[c], exp_fr);
        end
      end
      t += FRAME;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
