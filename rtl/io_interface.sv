// io_interface: the chip's I/O interface.
//
// Host commands carry a tile number and a tile command. The interface holds one
// command in a register stage, presents it to the addressed tile and releases it
// when that tile accepts it; a command to a busy tile therefore stalls the host
// (host_ready low) until the tile frees up. Read data coming back from any tile is
// registered and returned on host_rsp_valid/host_rsp (tiles answer one at a time,
// since each read is a separate command). The packet format is this design's own.
module io_interface
  import hurry_pkg::*;
#(
  parameter int unsigned NTILE = NUM_TILE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  chip_cmd_t           host_cmd,
  input  logic                host_valid,
  output logic                host_ready,
  output logic                host_rsp_valid,
  output logic [BUS_BITS-1:0] host_rsp,
  output tile_cmd_t           t_cmd,
  output logic [NTILE-1:0]    t_valid,
  input  logic [NTILE-1:0]    t_ready,
  input  logic [NTILE-1:0]    t_rsp_valid,
  input  logic [BUS_BITS-1:0] t_rsp [NTILE]
);
  localparam int unsigned TA = (NTILE > 1) ? $clog2(NTILE) : 1;

  chip_cmd_t q;
  logic      q_valid;
  logic [TA-1:0] dst;

  assign dst        = TA'(q.tile);
  assign t_cmd      = q.tcmd;
  assign host_ready = !q_valid || t_ready[dst];

  always_comb begin
    t_valid = '0;
    if (q_valid) t_valid[dst] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; q_valid <= 1'b0; host_rsp_valid <= 1'b0; host_rsp <= '0;
    end else begin
      if (host_ready) begin
        q_valid <= host_valid;
        if (host_valid) q <= host_cmd;
      end
      host_rsp_valid <= |t_rsp_valid;
      for (int unsigned t = 0; t < NTILE; t++)
        if (t_rsp_valid[t]) host_rsp <= t_rsp[t];
    end
  end

  // Commands must name an existing tile.
  a_tile_exists: assert property (@(posedge clk) disable iff (!rst_n)
    host_valid |-> 32'(host_cmd.tile) < NTILE);
endmodule
