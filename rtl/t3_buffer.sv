// t3_buffer: internal buffer for one recalled (T3) event.
//
// 4096 x 32 bit, written by the T3 controller as words come from external
// RAM and read by the microcontroller as 8192 16-bit words: 16-bit word 2k
// is the low half of 32-bit word k, 2k+1 the high half. The read port has a
// registered output (one cycle). The paper names this buffer; its
// organisation is this design's.
module t3_buffer #(
  parameter int DEPTH = 4096
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(DEPTH)-1:0]   waddr,
  input  logic [31:0]                wdata,
  input  logic [$clog2(DEPTH):0]     raddr,   // 16-bit word address
  output logic [15:0]                rdata
);
  logic [1:0][15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr[$clog2(DEPTH):1]][raddr[0]];
  end
endmodule
