// tb_hurry_chip: the chip end to end at reduced size (2 tiles x 2 IMAs, 64x64
// arrays, 256-word eDRAMs). Host commands go through the I/O interface; the layer
// flow of hurry_flow.svh runs on IMA 0 of tile 0 and IMA 1 of tile 1, results are
// read back through the host response port. Each mechanism must occur at least
// once: merged Conv+Res VMM, ReLU, softmax through the look-up table, the Max FB
// working while the array runs a VMM (fine-grained FB pipeline), and a stalled host
// command.
module tb_hurry_chip;
  import hurry_pkg::*;
  localparam int NT = 2, NI = 2, R = 64, ED = 256, KR = 20, NO = 4;
  logic clk = 0, rst_n = 0;
  chip_cmd_t host_cmd;
  logic host_valid, host_ready, host_rsp_valid;
  logic [BUS_BITS-1:0] host_rsp;
  logic [NI-1:0] arr_busy [NT];
  logic [NI-1:0] max_busy [NT];
  int checks = 0, failures = 0, n_overlap = 0, n_stall = 0;

  hurry_chip #(.NTILE(NT), .NIMA(NI), .ROWS(R), .COLS(R), .EDEPTH(ED)) dut (.*);

  `include "hurry_chip_tb_body.svh"
endmodule
