// shift_add: shift-and-add (SnA) unit between the ADC and the output register.
//
// Weights are 8-bit and cells hold one bit, so a weight occupies 8 neighbouring
// columns, bit j in column j of the group; inputs arrive as 8 bit-planes. The code
// of column j converted during bit-plane i therefore has weight 2^(i+j). For each
// valid ADC code this unit reads the addressed OR entry (or zero when first marks
// the start of a sum), adds code << shift and writes the result back in the same
// cycle. All arithmetic is unsigned; the shift-and-add principle is the design's,
// the column grouping and unsigned format are this implementation's choices.
module shift_add
  import hurry_pkg::*;
#(
  parameter int unsigned AW = ACC_BITS
) (
  input  logic                in_valid,
  input  logic [ADC_BITS-1:0] code,
  input  logic [3:0]          shift,     // input bit + weight bit, 0..14
  input  logic                first,     // start a new sum at addr
  input  logic [8:0]          addr,
  input  logic [AW-1:0]       or_rdata,  // OR[addr]
  output logic [8:0]          or_raddr,
  output logic                or_we,
  output logic [8:0]          or_waddr,
  output logic [AW-1:0]       or_wdata
);
  always_comb begin
    or_raddr = addr;
    or_waddr = addr;
    or_we    = in_valid;
    or_wdata = (first ? '0 : or_rdata) + (AW'(code) << shift);
  end
endmodule
