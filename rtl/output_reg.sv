// output_reg: 2 KB output register (OR) of an IMA.
//
// 512 entries of 32 bits. Write port A belongs to the shift-and-add unit and wins
// when both ports write the same entry; port B is used by the Max/ReLU FB to store
// its result. Read port A serves the shift-and-add read-modify-write, port B the
// Max/ReLU FB and port C the tile bus. Reads are combinational, writes synchronous.
// Contents start at zero.
module output_reg
  import hurry_pkg::*;
#(
  parameter int unsigned DEPTH = OR_DEPTH,
  parameter int unsigned AW    = ACC_BITS
) (
  input  logic                     clk,
  input  logic                     we_a,
  input  logic [$clog2(DEPTH)-1:0] waddr_a,
  input  logic [AW-1:0]            wdata_a,
  input  logic                     we_b,
  input  logic [$clog2(DEPTH)-1:0] waddr_b,
  input  logic [AW-1:0]            wdata_b,
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  output logic [AW-1:0]            rdata_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output logic [AW-1:0]            rdata_b,
  input  logic [$clog2(DEPTH)-1:0] raddr_c,
  output logic [AW-1:0]            rdata_c
);
  logic [AW-1:0] mem [DEPTH];

  initial for (int unsigned i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (we_b && !(we_a && waddr_a == waddr_b)) mem[waddr_b] <= wdata_b;
    if (we_a) mem[waddr_a] <= wdata_a;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
  assign rdata_c = mem[raddr_c];
endmodule
