// fe_bit: one channel of the 320 MHz to 80 MHz front end.
//
// Three rows of flip-flops. A 4-bit shift register clocked at 320 MHz keeps
// the last four samples of the discriminator line; a 4-bit register enabled by
// the decoded counter output (load, one 320 MHz cycle in four) copies it; a
// third register clocked at 80 MHz, in phase with the 320 MHz clock, hands
// the four samples to the 80 MHz domain. This is the circuit of the paper's
// front-end schematic; the counter is shared and lives in front_end.
// Output order is this design's choice: q[0] is the oldest sample of the four
// and q[3] the newest.
module fe_bit (
  input  logic       clk320,
  input  logic       clk80,
  input  logic       load,   // decoded counter state '10'
  input  logic       d,
  output logic [3:0] q
);
  logic [3:0] sr;   // sr[0] newest
  logic [3:0] lat;

  always_ff @(posedge clk320) sr  <= {sr[2:0], d};
  always_ff @(posedge clk320) if (load) lat <= sr;
  // reorder so that q[0] is the oldest sample
  always_ff @(posedge clk80)  q   <= {lat[0], lat[1], lat[2], lat[3]};
endmodule
