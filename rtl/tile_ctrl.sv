// tile_ctrl: controller of one tile.
//
// It decodes tile commands and moves data over the tile's shared bus, one 512-bit
// word per cycle:
//   T_EDRAM_WR  1 cycle        eDRAM[addr] <- data
//   T_EDRAM_RD  2 cycles       rsp_data <- eDRAM[addr] (rsp_valid for one cycle)
//   T_LOAD_IR   len cycles     IR[ir_addr + i] of IMA ima <- eDRAM[addr + i]
//   T_STORE_OR  17 cycles      eDRAM[addr] <- OR[or_addr .. or_addr + 15] of IMA ima,
//                              entry j in bits 32j+31..32j
//   T_IMA       >= 1 cycle     pass icmd to IMA ima; waits while that IMA stalls it
//   T_SOFTMAX   3 len + 4      x_i <- OR[or_addr + i] >> shift of IMA ima, clipped to
//                              8 bits (Q4.4 logits), i < len; x_max <- OR[xmax_addr],
//                              the maximum an I_MAX with the same shift left there; y <-
//                              softmax through the look-up-table unit; eDRAM[addr2] <- y,
//                              element i in bits 16i+15..16i
// T_STORE_OR and T_SOFTMAX first wait until IMA ima has finished all its commands,
// so that they read complete OR contents. One command is taken at a time (cmd_ready high in the idle state). The IMAs run
// their own commands in the background, so the tile can feed other IMAs meanwhile.
// The command set is this design's own; the tile's parts and the use of the look-up
// table for softmax follow the architecture.
module tile_ctrl
  import hurry_pkg::*;
#(
  parameter int unsigned NIMA   = NUM_IMA,
  parameter int unsigned ROWS   = ARR_ROWS,
  parameter int unsigned EDEPTH = EDRAM_DEPTH,
  parameter int unsigned SMN    = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  tile_cmd_t                 cmd,
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  output logic                      rsp_valid,
  output logic [BUS_BITS-1:0]       rsp_data,
  // eDRAM
  output logic                      e_we,
  output logic [$clog2(EDEPTH)-1:0] e_waddr,
  output logic [BUS_BITS-1:0]       e_wdata,
  output logic [$clog2(EDEPTH)-1:0] e_raddr,
  input  logic [BUS_BITS-1:0]       e_rdata,
  // IMAs
  output ima_cmd_t                  icmd,
  output logic [NIMA-1:0]           icmd_valid,
  input  logic [NIMA-1:0]           icmd_ready,
  input  logic [NIMA-1:0]           ima_busy,
  output logic [NIMA-1:0]           ir_we,
  output logic [8:0]                ir_waddr,
  output logic [ROWS-1:0]           ir_wdata,
  output logic [8:0]                or_raddr,
  input  logic [ACC_BITS-1:0]       or_rdata [NIMA],
  // look-up-table (softmax) unit
  output logic                      sm_start,
  output logic [7:0]                sm_x [SMN],
  output logic [7:0]                sm_xmax,       // valid with sm_start
  output logic [$clog2(SMN+1)-1:0]  sm_count,
  input  logic                      sm_done,
  input  logic [15:0]               sm_y [SMN]
);
  localparam int unsigned EA = $clog2(EDEPTH);
  localparam int unsigned IA = (NIMA > 1) ? $clog2(NIMA) : 1;

  typedef enum logic [2:0] {S_IDLE, S_RD, S_LOAD, S_STORE, S_IMA, S_SM_GATHER, S_SM_RUN, S_SM_WB} state_t;
  state_t state;
  tile_cmd_t c;
  logic [5:0] i;
  logic [BUS_BITS-1:0] acc;
  logic [IA-1:0] sel;

  assign sel       = IA'(c.ima);
  assign cmd_ready = (state == S_IDLE);
  assign icmd      = c.icmd;
  assign ir_waddr  = c.ir_addr + 9'(i);
  assign ir_wdata  = e_rdata[ROWS-1:0];
  assign sm_count  = ($clog2(SMN+1))'(c.len);

  function automatic logic [7:0] clip8(logic [ACC_BITS-1:0] v, logic [4:0] sh);
    logic [ACC_BITS-1:0] s;
    s = v >> sh;
    return (s > 255) ? 8'hFF : s[7:0];
  endfunction
  assign sm_xmax   = clip8(or_rdata[sel], 5'd0);   // already scaled by the Max FB

  always_comb begin
    e_raddr    = EA'(c.addr) + EA'(i);
    or_raddr   = c.or_addr + 9'(i);
    e_we       = 1'b0;
    e_waddr    = EA'(c.addr);
    e_wdata    = c.data;
    ir_we      = '0;
    icmd_valid = '0;
    sm_start   = 1'b0;
    case (state)
      S_IDLE:  if (cmd_valid && cmd.op == T_EDRAM_WR) begin
                 e_we = 1'b1; e_waddr = EA'(cmd.addr); e_wdata = cmd.data;
               end
      S_LOAD:  ir_we[sel] = 1'b1;
      S_STORE: if (i == 6'd16) begin e_we = 1'b1; e_wdata = acc; end
      S_IMA:   icmd_valid[sel] = 1'b1;
      S_SM_GATHER: if (i == c.len && !ima_busy[sel]) begin
                 or_raddr = c.xmax_addr;
                 sm_start = 1'b1;
               end
      S_SM_WB: begin
                 e_we    = 1'b1;
                 e_waddr = EA'(c.addr2);
                 for (int unsigned k = 0; k < SMN; k++) e_wdata[16*k +: 16] = sm_y[k];
               end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; i <= '0; acc <= '0; rsp_valid <= 1'b0; rsp_data <= '0;
      for (int unsigned k = 0; k < SMN; k++) sm_x[k] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; i <= '0; acc <= '0;
          case (cmd.op)
            T_EDRAM_RD: state <= S_RD;
            T_LOAD_IR:  state <= (cmd.len == 0) ? S_IDLE : S_LOAD;
            T_STORE_OR: state <= S_STORE;
            T_IMA:      state <= S_IMA;
            T_SOFTMAX:  state <= S_SM_GATHER;
            default:    state <= S_IDLE;
          endcase
        end
        S_RD: begin rsp_valid <= 1'b1; rsp_data <= e_rdata; state <= S_IDLE; end
        S_LOAD: begin
          if (i == c.len - 1'b1) state <= S_IDLE;
          i <= i + 1'b1;
        end
        S_STORE: if (!ima_busy[sel]) begin
          if (i == 6'd16) state <= S_IDLE;
          else acc[32*i[3:0] +: 32] <= or_rdata[sel];
          i <= i + 1'b1;
        end
        S_IMA: if (icmd_ready[sel]) state <= S_IDLE;
        S_SM_GATHER: if (!ima_busy[sel]) begin
          if (i == c.len) state <= S_SM_RUN;      // LUT started this cycle
          else if (32'(i) < SMN) sm_x[i[$clog2(SMN)-1:0]] <= clip8(or_rdata[sel], c.shift);
          i <= i + 1'b1;
        end
        S_SM_RUN: if (sm_done) state <= S_SM_WB;
        S_SM_WB: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
