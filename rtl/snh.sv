// snh: behavioural model of the bitline sample-and-hold stage.
//
// This models an analog part. When sample is high at a clock edge every column's
// bitline current is captured; the held value of column sel is presented to the
// ADC until the next sample. This lets all columns be read in one array access and
// then converted one column per cycle by a shared ADC. Held values start at 0.
module snh
  import hurry_pkg::*;
#(
  parameter int unsigned COLS = ARR_COLS,
  parameter int unsigned IW   = CUR_BITS
) (
  input  logic                clk,
  input  logic                sample,
  input  logic [IW-1:0]       bl_i [COLS],
  input  logic [IDX_BITS-1:0] sel,
  output logic [IW-1:0]       held
);
  logic [IW-1:0] hold [COLS];

  initial for (int unsigned c = 0; c < COLS; c++) hold[c] = '0;

  always_ff @(posedge clk)
    if (sample) hold <= bl_i;

  always_comb held = (32'(sel) < COLS) ? hold[$clog2(COLS)'(sel)] : '0;
endmodule
