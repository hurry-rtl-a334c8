// hurry_chip: top level of the HURRY ReRAM in-situ accelerator chip.
//
// NTILE tiles behind one I/O interface. Each tile has NIMA IMAs with one ROWS x COLS
// array of 1-bit ReRAM cells, split at run time into functional blocks (Conv, Res,
// Max, ReLU) by the block activation scheme, plus an eDRAM, a controller and a
// softmax look-up table. The host sends chip_cmd_t packets (tile number + tile
// command) and receives eDRAM read data on host_rsp. The routers of the on-chip
// mesh are not modelled: the I/O interface reaches every tile directly.
// The per-IMA busy flags are outputs for performance counting.
module hurry_chip
  import hurry_pkg::*;
#(
  parameter int unsigned NTILE  = NUM_TILE,
  parameter int unsigned NIMA   = NUM_IMA,
  parameter int unsigned ROWS   = ARR_ROWS,
  parameter int unsigned COLS   = ARR_COLS,
  parameter int unsigned EDEPTH = EDRAM_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  chip_cmd_t           host_cmd,
  input  logic                host_valid,
  output logic                host_ready,
  output logic                host_rsp_valid,
  output logic [BUS_BITS-1:0] host_rsp,
  output logic [NIMA-1:0]     arr_busy [NTILE],
  output logic [NIMA-1:0]     max_busy [NTILE]
);
  tile_cmd_t           t_cmd;
  logic [NTILE-1:0]    t_valid, t_ready, t_rsp_valid;
  logic [BUS_BITS-1:0] t_rsp [NTILE];

  io_interface #(.NTILE(NTILE)) u_io (
    .clk, .rst_n, .host_cmd, .host_valid, .host_ready, .host_rsp_valid, .host_rsp,
    .t_cmd, .t_valid, .t_ready, .t_rsp_valid, .t_rsp
  );

  for (genvar t = 0; t < NTILE; t++) begin : g_tile
    tile #(.NIMA(NIMA), .ROWS(ROWS), .COLS(COLS), .EDEPTH(EDEPTH)) u_tile (
      .clk, .rst_n,
      .cmd(t_cmd), .cmd_valid(t_valid[t]), .cmd_ready(t_ready[t]),
      .rsp_valid(t_rsp_valid[t]), .rsp_data(t_rsp[t]),
      .ima_arr_busy(arr_busy[t]), .ima_max_busy(max_busy[t])
    );
  end
endmodule
