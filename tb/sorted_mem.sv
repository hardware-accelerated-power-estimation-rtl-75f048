// sorted_mem: behavioural model of the memory that holds the sorted array searched by
// the binary-search example. Synchronous read: when 'rd' is high at a rising edge,
// 'data' shows mem[addr] from the next cycle on and holds it until the next read.
// A write port lets a testbench load the array. Not part of the design itself.
module sorted_mem #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 16
) (
  input  logic          clk,
  input  logic          rd,
  input  logic [AW-1:0] addr,
  output logic [DW-1:0] data,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd) data <= mem[addr];
  end
endmodule
