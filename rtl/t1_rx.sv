// t1_rx: receiver of the dedicated T1 line from the surface station.
//
// Frame on the line (from the surface-station side): a rising edge marks the
// T1 bin, the line stays high 200 ns and low 300 ns, then the 24-bit local
// timestamp (LTS) follows MSB first at 100 ns per bit; the whole frame lasts
// 2.9 us. The line is asynchronous to this device, so it is brought into the
// 80 MHz domain by a two-flop synchronizer. A rising edge while idle gives a
// one-cycle t1_pulse and starts a bit timer; each bit is sampled in its middle
// (FIRST_BIT_CYC cycles after the edge for the MSB, then every BIT_CYC).
// After the last bit lts/lts_valid are updated. The line is ignored until
// FRAME_CYC cycles after the edge, so timestamp bits are never taken for a
// new trigger. Frame format follows the paper; sampling points, the
// synchronizer and the frame guard are this design's choices.
//
// Timing: t1_pulse comes 3 cycles after the edge reaches t1_line (two
// synchronizer stages and the edge detector).
module t1_rx #(
  parameter int LTS_W         = 24,
  parameter int FIRST_BIT_CYC = 44,   // 500 ns + half a 100 ns bit
  parameter int BIT_CYC       = 8,    // 100 ns
  parameter int FRAME_CYC     = 232   // 2.9 us
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             t1_line,
  output logic             t1_pulse,
  output logic [LTS_W-1:0] lts,
  output logic             lts_valid
);
  localparam int CW = $clog2(FRAME_CYC + 1);
  localparam int NB = $clog2(LTS_W + 1);

  logic [2:0]       sync;     // sync[0] first stage
  logic             busy;
  logic [CW-1:0]    tcnt;     // cycles left in the frame
  logic [CW-1:0]    btmr;     // cycles to the next bit sample
  logic [LTS_W-2:0] shreg;   // the first 23 bits; the last goes straight to lts
  logic [NB-1:0]    nbits;    // bits still to receive

  wire rise = sync[1] & ~sync[2];

  always_ff @(posedge clk) begin
    sync      <= {sync[1:0], t1_line};
    t1_pulse  <= 1'b0;
    lts_valid <= 1'b0;
    if (rst) begin
      sync  <= '0;
      busy  <= 1'b0;
      tcnt  <= '0;
      btmr  <= '0;
      nbits <= '0;
      lts   <= '0;
      shreg <= '0;
    end else if (!busy) begin
      if (rise) begin
        busy     <= 1'b1;
        t1_pulse <= 1'b1;
        tcnt     <= CW'(FRAME_CYC - 2);
        btmr     <= CW'(FIRST_BIT_CYC - 1);
        nbits    <= NB'(LTS_W);
      end
    end else begin
      tcnt <= tcnt - CW'(1);
      if (tcnt == '0) busy <= 1'b0;
      if (nbits != '0) begin
        if (btmr == '0) begin
          // sync[1] is the line as it was FIRST_BIT_CYC (+ k * BIT_CYC)
          // cycles after the edge, both seen through the synchronizer
          shreg <= {shreg[LTS_W-3:0], sync[1]};
          nbits <= nbits - NB'(1);
          btmr  <= CW'(BIT_CYC - 1);
          if (nbits == NB'(1)) begin
            lts       <= {shreg, sync[1]};
            lts_valid <= 1'b1;
          end
        end else begin
          btmr <= btmr - CW'(1);
        end
      end
    end
  end
endmodule
