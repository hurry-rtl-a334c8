// edram: 512 KB tile buffer.
//
// 8192 words of 512 bits, one synchronous write port and one combinational read
// port, shared by everything on the tile bus. Written as a memory array; the
// refresh of a real eDRAM macro is not modelled. Contents start at zero.
module edram
  import hurry_pkg::*;
#(
  parameter int unsigned DEPTH = EDRAM_DEPTH,
  parameter int unsigned WIDTH = BUS_BITS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  initial for (int unsigned i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
