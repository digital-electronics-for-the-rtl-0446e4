// ts_table: ring of the LTS timestamps of the events stored in external RAM.
//
// 2048 entries of 24 bits, one per event slot of the external RAM: entry i
// holds the LTS of the event whose data start at external address
// {i, 12'b0}, so the entry's index is the 11 MSBs of the event's address.
// One write port (event write-back) and one read port with a registered
// output (T3 search), as an FPGA block RAM. Size and the index/address link
// follow the paper.
module ts_table #(
  parameter int DEPTH = 2048,
  parameter int W     = 24
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
