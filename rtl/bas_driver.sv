// bas_driver: block activation scheme (BAS) line-voltage selector.
//
// The crossbar is split into up to NFB rectangular functional blocks (FBs). Each cycle
// every FB is idle, being reset, having one of its columns written, or being read.
// This block turns those per-FB operations into one voltage per wordline (WL) and per
// bitline (BL), using only the third-voltage levels GND, 1/3 Vset, 2/3 Vset, Vset and
// Vreset, so that one FB can be written while another is read:
//   reset : FB rows at Vreset, FB columns at GND (every cell of the FB goes to 0)
//   write : FB rows at Vset for a '1', 2/3 Vset for a '0'; the written column at GND,
//           every other column at 1/3 Vset, so only the written column sees a full Vset
//   read  : FB rows at 2/3 Vset for input bit 1, 1/3 Vset for 0 (1-bit DAC); BLs at
//           1/3 Vset, so an ON cell passes one unit of current per 1/3 Vset across it.
// These levels are those of the block activation scheme's example. Lines outside
// every active FB rest at 1/3 Vset, and on a shared wordline reset wins over write,
// write over read (a reading FB sees the writer's WL levels, as in that example):
// both are this design's choices. Purely combinational.
module bas_driver
  import hurry_pkg::*;
#(
  parameter int unsigned ROWS = ARR_ROWS,
  parameter int unsigned COLS = ARR_COLS,
  parameter int unsigned NFB  = NUM_FB
) (
  input  fb_cfg_t             fb      [NFB],
  input  fb_op_t              op      [NFB],
  input  logic [IDX_BITS-1:0] wr_col,          // absolute column being written
  input  logic [ROWS-1:0]     wr_data,         // bit for each row of that column
  input  logic [ROWS-1:0]     rd_in,           // DAC input bit for each row
  output volt_t               wl_v    [ROWS],
  output volt_t               bl_v    [COLS]
);

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      logic in_rst, in_wr, in_rd;
      in_rst = 1'b0; in_wr = 1'b0; in_rd = 1'b0;
      for (int unsigned f = 0; f < NFB; f++) begin
        if (r >= 32'(fb[f].r0) && r <= 32'(fb[f].r1)) begin
          in_rst |= (op[f] == FB_RESET);
          in_wr  |= (op[f] == FB_WRITE);
          in_rd  |= (op[f] == FB_READ);
        end
      end
      if (in_rst)     wl_v[r] = V_RESET;
      else if (in_wr) wl_v[r] = wr_data[r] ? V_SET : V_2THIRD;
      else if (in_rd) wl_v[r] = rd_in[r] ? V_2THIRD : V_THIRD;
      else            wl_v[r] = V_THIRD;
    end
    for (int unsigned c = 0; c < COLS; c++) begin
      logic gnd;
      gnd = 1'b0;
      for (int unsigned f = 0; f < NFB; f++) begin
        if (c >= 32'(fb[f].c0) && c <= 32'(fb[f].c1)) begin
          gnd |= (op[f] == FB_RESET);
          gnd |= (op[f] == FB_WRITE) && (c == 32'(wr_col));
        end
      end
      bl_v[c] = gnd ? V_GND : V_THIRD;
    end
  end

endmodule
