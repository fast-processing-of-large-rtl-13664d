// local_mem: two-port local memory of a NALE.
//
// Used twice per NALE: as the 32-bit local data memory and as the 16-bit
// local instruction memory. The core port (c_*) serves the NALE's own
// execution; the external port (x_*) is how the dispatch logic loads programs
// and data and how results can be read back. Both ports read asynchronously
// (the value for an address appears in the same cycle) and write on the rising
// clock edge. If both ports write the same address in one cycle the core
// port's value is kept. Depth and port structure are this design's choice;
// the contents are not reset.
module local_mem #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     c_we,
  input  logic [$clog2(DEPTH)-1:0] c_addr,
  input  logic [WIDTH-1:0]         c_wdata,
  output logic [WIDTH-1:0]         c_rdata,
  input  logic                     x_we,
  input  logic [$clog2(DEPTH)-1:0] x_addr,
  input  logic [WIDTH-1:0]         x_wdata,
  output logic [WIDTH-1:0]         x_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  assign c_rdata = mem[c_addr];
  assign x_rdata = mem[x_addr];

  always_ff @(posedge clk) begin
    if (x_we && !(c_we && c_addr == x_addr)) mem[x_addr] <= x_wdata;
    if (c_we) mem[c_addr] <= c_wdata;
  end
endmodule
