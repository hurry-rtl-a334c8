// ima_ctrl: controller of one IMA (in-situ multiply-accumulate unit).
//
// It keeps the rectangle of each of the NFB functional blocks (FBs) and runs two
// engines side by side, so that FBs work as a fine-grained pipeline:
//  * the array engine drives the crossbar through the BAS driver:
//      I_CFG    1 cycle          set FB fb to cmd.cfg
//      I_RESET  1 cycle          reset every cell of FB fb
//      I_WRITE  ncols cycles     column k of FB fb <- IR[a + k] (one column per cycle)
//      I_VMM    8 x (1 + ncols)  for bit-plane p = 0..7: drive IR[a + p] on the rows of
//                                FB fb and sample all bitlines (1 cycle), then convert
//                                one column per cycle; the shift-and-add unit adds the
//                                code << (p + k%8) into OR[b + k/8] (k = column in FB).
//                                With res_en the rows of FB res_fb (the Res FB placed
//                                under the Conv FB, same columns) are read with a 1 during
//                                bit-plane 0 only, so the residual stored there is added
//                                once, unshifted, by the bitline currents themselves.
//    plus one cycle at the end for the last ADC result.
//  * the Max engine serves I_MAX: it reads len OR entries (one per cycle; this is
//    the write of the Conv results into the Max FB), each shifted right by shift and
//    clipped to 8 bits, runs the Max/ReLU tournament and writes the winner to OR[b].
// A command is accepted (cmd_ready) when the engine it needs is idle, so an I_MAX can
// run while the array engine does the next I_VMM; otherwise the command stalls. The
// controller does not track OR dependences between the two engines: a program must
// not start I_MAX on entries an unfinished I_VMM still writes.
// Timing of a write and a read (one cycle per FB column) follows the block activation
// scheme; command encoding, handshake and the Res read-once mechanism are this
// design's choices.
module ima_ctrl
  import hurry_pkg::*;
#(
  parameter int unsigned ROWS = ARR_ROWS,
  parameter int unsigned COLS = ARR_COLS,
  parameter int unsigned NFB  = NUM_FB,
  parameter int unsigned MAXN = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // commands
  input  ima_cmd_t            cmd,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  output logic                busy,
  // BAS driver / DAC
  output fb_cfg_t             fb_cfg   [NFB],
  output fb_op_t              fb_op    [NFB],
  output logic [IDX_BITS-1:0] wr_col,
  output logic [ROWS-1:0]     row_en,
  output logic [ROWS-1:0]     force1,
  // input register read
  output logic [8:0]          ir_raddr,
  // sample-and-hold and ADC
  output logic                snh_sample,
  output logic [IDX_BITS-1:0] snh_sel,
  output logic                adc_start,
  // shift-and-add controls, aligned with the ADC result
  output logic [3:0]          sna_shift,
  output logic                sna_first,
  output logic [8:0]          sna_addr,
  // output register port B (Max engine)
  output logic [8:0]          or_raddr_b,
  input  logic [ACC_BITS-1:0] or_rdata_b,
  output logic                or_we_b,
  output logic [8:0]          or_waddr_b,
  output logic [ACC_BITS-1:0] or_wdata_b,
  // Max/ReLU FB
  output logic                mx_start,
  output logic                mx_relu,
  output logic [$clog2(MAXN+1)-1:0] mx_count,
  output logic [7:0]          mx_elems [MAXN],
  input  logic                mx_done,
  input  logic [7:0]          mx_result,
  // activity, for performance counting
  output logic                arr_busy,
  output logic                max_busy
);
  typedef enum logic [2:0] {A_IDLE, A_RESET, A_WRITE, A_SAMPLE, A_CONV, A_FLUSH} astate_t;
  typedef enum logic [1:0] {M_IDLE, M_GATHER, M_RUN, M_STORE} mstate_t;

  astate_t astate;
  mstate_t mstate;
  fb_cfg_t cfg [NFB];
  ima_cmd_t ac, mc;                     // command held by each engine
  logic [IDX_BITS-1:0] k;               // column within FB
  logic [2:0]  plane;                   // bit-plane
  logic [5:0]  mk;                      // Max engine element counter
  logic [7:0]  result_q;

  // ADC pipeline stage: controls travel one cycle with the conversion
  logic [3:0] shift_d;
  logic       first_d;
  logic [8:0] addr_d;

  assign fb_cfg = cfg;

  function automatic logic [IDX_BITS-1:0] ncols(fb_cfg_t f);
    return f.c1 - f.c0 + 1'b1;
  endfunction

  // ---------------------------------------------------------------- array engine
  always_comb begin
    for (int unsigned f = 0; f < NFB; f++) fb_op[f] = FB_IDLE;
    wr_col     = cfg[ac.fb].c0 + k;
    ir_raddr   = ac.a + ((astate == A_WRITE) ? 9'(k) : 9'(plane));
    snh_sample = 1'b0;
    snh_sel    = cfg[ac.fb].c0 + k;
    adc_start  = 1'b0;
    row_en     = '0;
    force1     = '0;
    case (astate)
      A_RESET: fb_op[ac.fb] = FB_RESET;
      A_WRITE: fb_op[ac.fb] = FB_WRITE;
      A_SAMPLE: begin
        fb_op[ac.fb] = FB_READ;
        snh_sample   = 1'b1;
        for (int unsigned r = 0; r < ROWS; r++)
          row_en[r] = (r >= 32'(cfg[ac.fb].r0)) && (r <= 32'(cfg[ac.fb].r1));
        if (ac.res_en) begin
          fb_op[ac.res_fb] = FB_READ;
          if (plane == 0)
            for (int unsigned r = 0; r < ROWS; r++)
              force1[r] = (r >= 32'(cfg[ac.res_fb].r0)) && (r <= 32'(cfg[ac.res_fb].r1));
        end
      end
      A_CONV: adc_start = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      astate <= A_IDLE; ac <= '0; k <= '0; plane <= '0;
      shift_d <= '0; first_d <= 1'b0; addr_d <= '0;
      for (int unsigned f = 0; f < NFB; f++) cfg[f] <= '0;
    end else begin
      // controls for the code the ADC delivers next cycle
      shift_d <= 4'(plane) + 4'(k[2:0]);
      first_d <= (plane == 0) && (k[2:0] == 3'd0);
      addr_d  <= ac.b + 9'(k >> 3);
      case (astate)
        A_IDLE: if (cmd_valid && cmd_ready && cmd.op != I_MAX && cmd.op != I_NOP) begin
          ac <= cmd; k <= '0; plane <= '0;
          case (cmd.op)
            I_CFG:   cfg[cmd.fb] <= cmd.cfg;
            I_RESET: astate <= A_RESET;
            I_WRITE: astate <= A_WRITE;
            I_VMM:   astate <= A_SAMPLE;
            default: ;
          endcase
        end
        A_RESET: astate <= A_IDLE;
        A_WRITE: begin
          if (k == ncols(cfg[ac.fb]) - 1'b1) astate <= A_IDLE;
          k <= k + 1'b1;
        end
        A_SAMPLE: begin k <= '0; astate <= A_CONV; end
        A_CONV: begin
          if (k == ncols(cfg[ac.fb]) - 1'b1) begin
            k <= '0;
            if (plane == 3'd7) astate <= A_FLUSH;
            else begin plane <= plane + 1'b1; astate <= A_SAMPLE; end
          end else k <= k + 1'b1;
        end
        A_FLUSH: astate <= A_IDLE;
        default: astate <= A_IDLE;
      endcase
    end
  end

  assign sna_shift = shift_d;
  assign sna_first = first_d;
  assign sna_addr  = addr_d;

  // ---------------------------------------------------------------- Max engine
  function automatic logic [7:0] clip8(logic [ACC_BITS-1:0] v, logic [4:0] sh);
    logic [ACC_BITS-1:0] s;
    s = v >> sh;
    return (s > 255) ? 8'hFF : s[7:0];
  endfunction

  assign or_raddr_b = mc.a + 9'(mk);
  assign mx_relu    = mc.relu;
  assign mx_count   = ($clog2(MAXN+1))'(mc.len);
  assign mx_start   = (mstate == M_GATHER) && (mk == mc.len);
  assign or_we_b    = (mstate == M_STORE);
  assign or_waddr_b = mc.b;
  assign or_wdata_b = ACC_BITS'(result_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate <= M_IDLE; mc <= '0; mk <= '0; result_q <= '0;
      for (int unsigned i = 0; i < MAXN; i++) mx_elems[i] <= '0;
    end else begin
      case (mstate)
        M_IDLE: if (cmd_valid && cmd_ready && cmd.op == I_MAX) begin
          mc <= cmd; mk <= '0; mstate <= M_GATHER;
        end
        M_GATHER: begin
          if (mk == mc.len) mstate <= M_RUN;       // mx_start issued this cycle
          else begin
            if (32'(mk) < MAXN) mx_elems[($clog2(MAXN))'(mk)] <= clip8(or_rdata_b, mc.shift);
            mk <= mk + 1'b1;
          end
        end
        M_RUN: if (mx_done) begin result_q <= mx_result; mstate <= M_STORE; end
        M_STORE: mstate <= M_IDLE;
        default: mstate <= M_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- handshake
  always_comb begin
    if (cmd.op == I_MAX) cmd_ready = (mstate == M_IDLE);
    else                 cmd_ready = (astate == A_IDLE);
  end
  assign arr_busy = (astate != A_IDLE);
  assign max_busy = (mstate != M_IDLE);
  assign busy     = arr_busy || max_busy;

  // A write or read must stay inside the array.
  property p_fb_inside;
    @(posedge clk) disable iff (!rst_n)
      (astate == A_WRITE || astate == A_SAMPLE) |->
        (32'(cfg[ac.fb].c1) < COLS && 32'(cfg[ac.fb].r1) < ROWS && cfg[ac.fb].c0 <= cfg[ac.fb].c1);
  endproperty
  a_fb_inside: assert property (p_fb_inside);
endmodule
