// tile: one tile of the chip.
//
// NIMA in-situ multiply-accumulate units (IMAs), a 512 KB eDRAM, the tile controller
// and the look-up-table unit for softmax, joined by the tile's shared 512-bit bus.
// Commands arrive on cmd/cmd_valid/cmd_ready; eDRAM reads return on rsp_valid/rsp_data
// (see tile_ctrl for the command set and timing). ima_arr_busy/ima_max_busy show,
// per IMA, whether its array engine and its Max/ReLU engine are working.
module tile
  import hurry_pkg::*;
#(
  parameter int unsigned NIMA   = NUM_IMA,
  parameter int unsigned ROWS   = ARR_ROWS,
  parameter int unsigned COLS   = ARR_COLS,
  parameter int unsigned EDEPTH = EDRAM_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  tile_cmd_t           cmd,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  output logic                rsp_valid,
  output logic [BUS_BITS-1:0] rsp_data,
  output logic [NIMA-1:0]     ima_arr_busy,
  output logic [NIMA-1:0]     ima_max_busy
);
  localparam int unsigned SMN = 32;
  localparam int unsigned EA  = $clog2(EDEPTH);

  logic                e_we;
  logic [EA-1:0]       e_waddr, e_raddr;
  logic [BUS_BITS-1:0] e_wdata, e_rdata;
  ima_cmd_t            icmd;
  logic [NIMA-1:0]     icmd_valid, icmd_ready, ir_we, ima_busy;
  logic [8:0]          ir_waddr, or_raddr;
  logic [ROWS-1:0]     ir_wdata;
  logic [ACC_BITS-1:0] or_rdata [NIMA];
  logic                sm_start, sm_done, sm_busy;
  logic [7:0]          sm_x [SMN];
  logic [7:0]          sm_xmax;
  logic [$clog2(SMN+1)-1:0] sm_count;
  logic [15:0]         sm_y [SMN];

  tile_ctrl #(.NIMA(NIMA), .ROWS(ROWS), .EDEPTH(EDEPTH), .SMN(SMN)) u_ctrl (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready, .rsp_valid, .rsp_data,
    .e_we, .e_waddr, .e_wdata, .e_raddr, .e_rdata,
    .icmd, .icmd_valid, .icmd_ready, .ima_busy, .ir_we, .ir_waddr, .ir_wdata, .or_raddr, .or_rdata,
    .sm_start, .sm_x, .sm_xmax, .sm_count, .sm_done, .sm_y
  );

  edram #(.DEPTH(EDEPTH), .WIDTH(BUS_BITS)) u_edram (
    .clk, .we(e_we), .waddr(e_waddr), .wdata(e_wdata), .raddr(e_raddr), .rdata(e_rdata)
  );

  softmax_lut #(.N(SMN)) u_lut (
    .clk, .rst_n, .start(sm_start), .x(sm_x), .xmax(sm_xmax), .count(sm_count),
    .busy(sm_busy), .done(sm_done), .y(sm_y)
  );

  for (genvar m = 0; m < NIMA; m++) begin : g_ima
    ima #(.ROWS(ROWS), .COLS(COLS)) u_ima (
      .clk, .rst_n,
      .cmd(icmd), .cmd_valid(icmd_valid[m]), .cmd_ready(icmd_ready[m]),
      .busy(ima_busy[m]), .arr_busy(ima_arr_busy[m]), .max_busy(ima_max_busy[m]),
      .ir_we(ir_we[m]), .ir_waddr, .ir_wdata,
      .or_raddr, .or_rdata(or_rdata[m])
    );
  end
endmodule
