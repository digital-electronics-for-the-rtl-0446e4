// sram_model: behavioural model of the external asynchronous SRAM bank
// (8 MWord x 32 bit by default). A write happens on the rising edge of WR#
// while CE# is low; read data are driven while CE# and RD# are low. It also
// counts protocol errors: WR# and RD# low together, WR# low without CE#, or
// WR# low while the controller is not driving the data bus.
module sram_model #(
  parameter int AW = 23,
  parameter int DW = 32
) (
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] dq_in,    // from the controller
  input  logic          dq_oe,
  output logic [DW-1:0] dq_out,   // to the controller
  input  logic          ce_n,
  input  logic          oe_n,
  input  logic          we_n,
  output int            errors
);
  logic [DW-1:0] mem [2**AW];
  logic          armed = 1'b0;    // a write pulse began with CE# low

  initial errors = 0;

  always @(negedge we_n) armed = !ce_n && dq_oe;
  always @(posedge we_n) begin
    if (armed && !ce_n) mem[addr] = dq_in;
    armed = 1'b0;
  end
  always @(we_n or oe_n or ce_n or dq_oe) begin
    if (!we_n && !oe_n) errors++;
    if (!we_n && (ce_n || !dq_oe)) errors++;
  end

  assign dq_out = (!ce_n && !oe_n) ? mem[addr] : '0;
endmodule
