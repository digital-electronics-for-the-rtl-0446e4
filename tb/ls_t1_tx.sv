// ls_t1_tx: behavioural model of the surface-station side of the T1 line.
//
// send(lts) drives one frame: rising edge (the T1 bin), 200 ns high, 300 ns
// low, then the 24-bit LTS MSB first at 100 ns per bit, then low until
// 2.9 us after the edge. Times are given in simulation units per nanosecond
// through NS (default 1 unit = 1 ns / 8, so that one 80 MHz cycle, 12.5 ns,
// is 100 units).
module ls_t1_tx #(
  parameter int UNITS_PER_100NS = 800
) (
  output logic line
);
  initial line = 1'b0;

  task automatic send(input logic [23:0] lts);
    line = 1'b1;
    #(2 * UNITS_PER_100NS);
    line = 1'b0;
    #(3 * UNITS_PER_100NS);
    for (int b = 23; b >= 0; b--) begin
      line = lts[b];
      #(UNITS_PER_100NS);
    end
    line = 1'b0;
  endtask
endmodule
