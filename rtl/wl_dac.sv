// wl_dac: the row of 1-bit DACs in front of the wordlines.
//
// Inputs reach the array one bit-plane at a time: for an 8-bit input vector the
// controller presents bit 0 of every element, then bit 1, and so on (LSB first is
// this design's choice). A 1-bit DAC only has to say whether its wordline carries a
// read pulse. Here each row's DAC output is the input bit gated by the row's
// enable: the enables select the rows of the FBs being read, e.g. the Conv rows for
// every bit-plane and the Res rows only for bit-plane 0. The BAS driver turns a 1
// into 2/3 Vset and a 0 into 1/3 Vset. Purely combinational.
module wl_dac
  import hurry_pkg::*;
#(
  parameter int unsigned ROWS = ARR_ROWS
) (
  input  logic [ROWS-1:0] row_en,   // rows of the FBs being read
  input  logic [ROWS-1:0] bits,     // current bit-plane of the inputs (from IR)
  input  logic [ROWS-1:0] force1,   // rows driven with a 1 regardless of bits
  output logic [ROWS-1:0] rd_in
);
  always_comb rd_in = (row_en & bits) | force1;
endmodule
