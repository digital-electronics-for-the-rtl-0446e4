// cal_counters: positive-sample accumulators for threshold calibration.
//
// One 32-bit accumulator per channel adds, every 80 MHz cycle, the number of
// active samples (0..4) that channel has in the front-end word, so it counts
// the channel's positive 320 MHz samples since reset (wrapping at 2^32). A
// 64-bit counter counts 80 MHz cycles. On 'latch' all 65 values are copied at
// once into the read registers, so software can take two readings, subtract
// them and divide by the time difference to obtain each channel's rate. The
// sizes and the simultaneous latch follow the paper; the microcontroller
// closes the calibration loop by rewriting the DAC thresholds.
//
// Timing: the latch takes the counts up to and including the previous cycle.
module cal_counters #(
  parameter int N_CH   = 64,
  parameter int SPW    = 4,
  parameter int ACC_W  = 32,
  parameter int TIME_W = 64
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N_CH*SPW-1:0]         din,    // din[N_CH*k + c]: sample k of channel c
  input  logic                        latch,
  output logic [N_CH-1:0][ACC_W-1:0]  acc_q,
  output logic [TIME_W-1:0]           time_q
);
  logic [N_CH-1:0][ACC_W-1:0] acc;
  logic [TIME_W-1:0]          tcnt;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [2:0] ones;
    always_comb begin
      ones = '0;
      for (int k = 0; k < SPW; k++) ones = ones + 3'(din[N_CH*k + c]);
    end
    always_ff @(posedge clk)
      if (rst) acc[c] <= '0;
      else     acc[c] <= acc[c] + ACC_W'(ones);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tcnt   <= '0;
      acc_q  <= '0;
      time_q <= '0;
    end else begin
      tcnt <= tcnt + 1'b1;
      if (latch) begin
        acc_q  <= acc;
        time_q <= tcnt;
      end
    end
  end
endmodule
