// pattern_gen: 320 MHz, 64-line test-pattern generator for the acquisition
// chain.
//
// When the test mode is on, the top feeds these lines to the front end in
// place of the discriminator outputs. Each line sends the same frame every
// FRAME 320 MHz cycles: the 29-bit value of a free-running 320 MHz cycle
// counter taken at the start of the frame, MSB first, then the line's 6-bit
// channel number, MSB first, then zeros up to the end of the frame. Every
// frame is thus unique in time and every line identifies itself, so a
// recalled event can be checked for the right channels, the right order of
// samples and the right time. The paper's hardware test used such a
// generator inside the FPGA with a 29-bit timestamp and 6 channel bits; the
// frame layout, the order of the fields, the frame length and the use of a
// sample counter as timestamp are this design's choices.
//
// Interface: clk320 only; rst (held for several cycles) clears the counter
// and starts a frame. pat[c] is the line of channel c, registered.
module pattern_gen #(
  parameter int N_CH  = 64,
  parameter int TS_W  = 29,
  parameter int ID_W  = 6,
  parameter int FRAME = 64     // 320 MHz cycles per frame, at least TS_W + ID_W
) (
  input  logic            clk320,
  input  logic            rst,
  output logic [N_CH-1:0] pat
);
  localparam int PW = $clog2(FRAME);

  logic [TS_W-1:0] tcnt;       // free-running sample counter
  logic [TS_W-1:0] ts;         // timestamp of the current frame
  logic [PW-1:0]   pos;        // bit position in the frame

  always_ff @(posedge clk320) begin
    if (rst) begin
      tcnt <= '0;
      ts   <= '0;
      pos  <= '0;
      pat  <= '0;
    end else begin
      tcnt <= tcnt + 1'b1;
      pos  <= (pos == PW'(FRAME - 1)) ? '0 : pos + 1'b1;
      if (pos == PW'(FRAME - 1)) ts <= tcnt + 1'b1;
      for (int c = 0; c < N_CH; c++) begin
        logic [ID_W-1:0] id;
        id = ID_W'(c);
        if (int'(pos) < TS_W)
          pat[c] <= ts[TS_W-1-int'(pos)];
        else if (int'(pos) < TS_W + ID_W)
          pat[c] <= id[ID_W-1-(int'(pos)-TS_W)];
        else
          pat[c] <= 1'b0;
      end
    end
  end
endmodule
