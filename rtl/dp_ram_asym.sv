// dp_ram_asym: double-port RAM with a wide write port and a narrow read port.
//
// Holds both circular buffers of the event acquisition: 2 x 2048 samples x
// 64 bit, written 256 bits (four samples) at a time and read 32 bits at a
// time. The MSB of each address selects the buffer. Read data appear one
// clock after the address (registered output, as an FPGA block RAM).
// Word layout: write word w holds read words 8w .. 8w+7, read word 8w+j being
// bits 32j+31 .. 32j of the write word. The port widths and depths follow the
// paper; the slice order is this design's choice.
module dp_ram_asym #(
  parameter int WW     = 256,
  parameter int RW     = 32,
  parameter int WDEPTH = 1024
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(WDEPTH)-1:0]           waddr,
  input  logic [WW-1:0]                       wdata,
  input  logic [$clog2(WDEPTH*WW/RW)-1:0]     raddr,
  output logic [RW-1:0]                       rdata
);
  localparam int R  = WW / RW;           // read words per write word
  localparam int SW = $clog2(R);

  logic [R-1:0][RW-1:0] mem [WDEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr[$bits(raddr)-1:SW]][raddr[SW-1:0]];
  end
endmodule
