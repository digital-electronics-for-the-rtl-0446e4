// front_end: converts the 64 discriminator lines sampled at 320 MHz into a
// 256-bit bus at 80 MHz.
//
// Each line goes through an fe_bit (4-bit shift register, enabled latch,
// 80 MHz register). One 2-bit binary counter at 320 MHz, shared by all
// channels, is decoded and its state '10' (output Q2) loads the latches every
// fourth 320 MHz cycle, so the latch copies a complete four-sample history
// once per 80 MHz period. Both structures follow the paper's front end.
// Only output Q2 of the decoder is used, so lint lists the other three as
// unused; the full decoder is kept to match the schematic.
//
// Interface: dout[64*k + c] is sample k (k = 0 oldest) of channel c, updated
// on every clk80 edge. clk80 must be in phase with clk320 (rising edges
// coincide every fourth clk320 edge). Latency from a sample to dout is two to
// three 80 MHz cycles, depending on its position in the group of four.
// The reset clears only the counter, as in the schematic; the sample
// registers settle after four 320 MHz cycles.
module front_end #(
  parameter int N_CH = 64,
  parameter int SPW  = 4
) (
  input  logic                clk320,
  input  logic                clk80,
  input  logic                rst,
  input  logic [N_CH-1:0]     din,
  output logic [N_CH*SPW-1:0] dout
);
  logic [1:0] cnt;
  logic [3:0] dec;   // decoded counter, dec[i] = (cnt == i)

  always_ff @(posedge clk320)
    if (rst) cnt <= '0;
    else     cnt <= cnt + 2'd1;

  always_comb begin
    dec = '0;
    dec[cnt] = 1'b1;
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [3:0] q;
    fe_bit u_bit (.clk320, .clk80, .load(dec[2]), .d(din[c]), .q);
    for (genvar k = 0; k < SPW; k++) begin : g_k
      assign dout[N_CH*k + c] = q[k];
    end
  end
endmodule
