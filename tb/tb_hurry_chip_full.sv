// tb_hurry_chip_full: the chip at its full size (16 tiles x 8 IMAs, 512x512 arrays,
// 512 KB eDRAMs, no parameter overrides) runs the layer flow of hurry_flow.svh on
// IMA 0 of tile 0 and IMA 7 of tile 15, with 64 Conv rows and 4 outputs.
module tb_hurry_chip_full;
  import hurry_pkg::*;
  localparam int NT = NUM_TILE, NI = NUM_IMA, R = ARR_ROWS, KR = 64, NO = 4;
  logic clk = 0, rst_n = 0;
  chip_cmd_t host_cmd;
  logic host_valid, host_ready, host_rsp_valid;
  logic [BUS_BITS-1:0] host_rsp;
  logic [NI-1:0] arr_busy [NT];
  logic [NI-1:0] max_busy [NT];
  int checks = 0, failures = 0, n_overlap = 0, n_stall = 0;

  hurry_chip dut (.*);

  `include "hurry_chip_tb_body.svh"
endmodule
