// input_reg: 32 KB input register (IR) of an IMA.
//
// 512 words of 512 bits. A word holds one bit-plane of a 512-element input vector
// (bit k of the word drives wordline k), so an 8-bit vector takes 8 words; a word
// may also hold one column of cell values for an FB write. One synchronous write
// port (from the tile bus) and one combinational read port (to the DACs and the
// BAS driver). Contents start at zero.
module input_reg
  import hurry_pkg::*;
#(
  parameter int unsigned DEPTH = IR_DEPTH,
  parameter int unsigned WIDTH = ARR_ROWS
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
