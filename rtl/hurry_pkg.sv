// hurry_pkg: types and constants shared by the HURRY accelerator RTL.
//
// Sizes follow the main configuration of the design: 16 tiles per chip, 8 IMAs per
// tile, one 512x512 array of 1-bit ReRAM cells per IMA, 9-bit ADCs, 32 KB input
// register, 2 KB output register and 512 KB eDRAM per tile. Word widths of the
// registers and buses, and the command formats, are this design's own choices.
package hurry_pkg;

  localparam int unsigned ARR_ROWS   = 512;   // wordlines per array
  localparam int unsigned ARR_COLS   = 512;   // bitlines per array
  localparam int unsigned NUM_FB     = 4;     // functional blocks per array
  localparam int unsigned NUM_IMA    = 8;     // IMAs per tile
  localparam int unsigned NUM_TILE   = 16;    // tiles per chip
  localparam int unsigned ADC_BITS   = 9;
  localparam int unsigned DATA_BITS  = 8;     // activation and weight precision
  localparam int unsigned ACC_BITS   = 32;    // output register entry
  localparam int unsigned IR_DEPTH   = 512;   // 32 KB / 64 B
  localparam int unsigned OR_DEPTH   = 512;   // 2 KB / 4 B
  localparam int unsigned BUS_BITS   = 512;   // tile bus and eDRAM word
  localparam int unsigned EDRAM_DEPTH= 8192;  // 512 KB / 64 B
  localparam int unsigned CUR_BITS   = 11;    // bitline current, units of (Vset/3 x Gon)
  localparam int unsigned IDX_BITS   = 10;    // row/column index (0..512)

  // Line voltages of the block activation scheme (third-voltage selection).
  typedef enum logic [2:0] {
    V_GND    = 3'd0,
    V_THIRD  = 3'd1,   // 1/3 Vset
    V_2THIRD = 3'd2,   // 2/3 Vset
    V_SET    = 3'd3,   // Vset
    V_RESET  = 3'd4    // Vreset (opposite polarity)
  } volt_t;

  // Operation of one functional block in one cycle.
  typedef enum logic [1:0] {
    FB_IDLE  = 2'd0,
    FB_RESET = 2'd1,
    FB_WRITE = 2'd2,
    FB_READ  = 2'd3
  } fb_op_t;

  // FB rectangle: rows r0..r1 and columns c0..c1, inclusive.
  typedef struct packed {
    logic [IDX_BITS-1:0] r0;
    logic [IDX_BITS-1:0] r1;
    logic [IDX_BITS-1:0] c0;
    logic [IDX_BITS-1:0] c1;
  } fb_cfg_t;

  // IMA commands.
  typedef enum logic [2:0] {
    I_NOP   = 3'd0,
    I_CFG   = 3'd1,   // fb <- cfg
    I_RESET = 3'd2,   // reset all cells of FB fb
    I_WRITE = 3'd3,   // column k of FB fb <- IR[a + k]
    I_VMM   = 3'd4,   // OR[b + k/8] <- sum over bit-planes IR[a..a+7] of FB fb (+ Res FB res_fb)
    I_MAX   = 3'd5    // OR[b] <- max/ReLU of OR[a..a+len-1] >> shift
  } ima_op_t;

  typedef struct packed {
    ima_op_t             op;
    logic [1:0]          fb;
    logic [1:0]          res_fb;
    logic                res_en;
    logic                relu;
    logic [4:0]          shift;
    logic [8:0]          a;
    logic [8:0]          b;
    logic [5:0]          len;
    fb_cfg_t             cfg;
  } ima_cmd_t;

  // Tile commands.
  typedef enum logic [2:0] {
    T_NOP     = 3'd0,
    T_EDRAM_WR= 3'd1,  // eDRAM[addr] <- data
    T_EDRAM_RD= 3'd2,  // response <- eDRAM[addr]
    T_LOAD_IR = 3'd3,  // IR of ima [ir_addr + i] <- eDRAM[addr + i], i < len
    T_STORE_OR= 3'd4,  // eDRAM[addr] <- OR entries [or_addr .. or_addr+15] of ima
    T_IMA     = 3'd5,  // forward icmd to ima
    T_SOFTMAX = 3'd6   // eDRAM[addr2] <- softmax of OR[or_addr + i] >> shift (i < len) of ima,
                       // with x_max = OR[xmax_addr], written there by an I_MAX
  } tile_op_t;

  typedef struct packed {
    tile_op_t            op;
    logic [2:0]          ima;
    logic [12:0]         addr;
    logic [12:0]         addr2;
    logic [8:0]          ir_addr;
    logic [8:0]          or_addr;
    logic [5:0]          len;
    logic [8:0]          xmax_addr;
    logic [4:0]          shift;
    ima_cmd_t            icmd;
    logic [BUS_BITS-1:0] data;
  } tile_cmd_t;

  typedef struct packed {
    logic [3:0] tile;
    tile_cmd_t  tcmd;
  } chip_cmd_t;

endpackage
