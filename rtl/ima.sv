// ima: one in-situ multiply-accumulate unit.
//
// Datapath, in the order data flows: input register (IR) -> 1-bit DACs -> BAS driver
// -> ReRAM crossbar -> sample-and-hold -> 9-bit ADC -> shift-and-add -> output
// register (OR); the Max/ReLU FB reads the OR and writes its winner back to it. The
// crossbar is shared by up to four FBs (e.g. Conv, Res, Max, ReLU) whose rectangles
// and operations the controller sets at run time. The tile fills the IR and reads the
// OR over its bus; commands arrive on cmd/cmd_valid/cmd_ready (see ima_ctrl for
// their timing). The crossbar, SnH and ADC are behavioural models of analog parts;
// the rest is synthesizable.
module ima
  import hurry_pkg::*;
#(
  parameter int unsigned ROWS = ARR_ROWS,
  parameter int unsigned COLS = ARR_COLS,
  parameter int unsigned MAXN = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  ima_cmd_t            cmd,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  output logic                busy,
  output logic                arr_busy,
  output logic                max_busy,
  // tile bus
  input  logic                ir_we,
  input  logic [8:0]          ir_waddr,
  input  logic [ROWS-1:0]     ir_wdata,
  input  logic [8:0]          or_raddr,
  output logic [ACC_BITS-1:0] or_rdata
);
  fb_cfg_t             fb_cfg [NUM_FB];
  fb_op_t              fb_op  [NUM_FB];
  logic [IDX_BITS-1:0] wr_col, snh_sel;
  logic [ROWS-1:0]     row_en, force1, rd_in, ir_rdata;
  logic [8:0]          ir_raddr;
  logic                snh_sample, adc_start, adc_valid;
  volt_t               wl_v [ROWS];
  volt_t               bl_v [COLS];
  logic [CUR_BITS-1:0] bl_i [COLS];
  logic [CUR_BITS-1:0] held;
  logic [ADC_BITS-1:0] code;
  logic [3:0]          sna_shift;
  logic                sna_first;
  logic [8:0]          sna_addr, or_raddr_a, or_waddr_a, or_raddr_b, or_waddr_b;
  logic                or_we_a, or_we_b;
  logic [ACC_BITS-1:0] or_rdata_a, or_wdata_a, or_rdata_b, or_wdata_b;
  logic                mx_start, mx_relu, mx_done, mx_busy;
  logic [$clog2(MAXN+1)-1:0] mx_count;
  logic [7:0]          mx_elems [MAXN];
  logic [7:0]          mx_result;

  ima_ctrl #(.ROWS(ROWS), .COLS(COLS), .NFB(NUM_FB), .MAXN(MAXN)) u_ctrl (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready, .busy,
    .fb_cfg, .fb_op, .wr_col, .row_en, .force1, .ir_raddr,
    .snh_sample, .snh_sel, .adc_start,
    .sna_shift, .sna_first, .sna_addr,
    .or_raddr_b, .or_rdata_b, .or_we_b, .or_waddr_b, .or_wdata_b,
    .mx_start, .mx_relu, .mx_count, .mx_elems, .mx_done, .mx_result,
    .arr_busy, .max_busy
  );

  input_reg #(.DEPTH(IR_DEPTH), .WIDTH(ROWS)) u_ir (
    .clk, .we(ir_we), .waddr(ir_waddr), .wdata(ir_wdata), .raddr(ir_raddr), .rdata(ir_rdata)
  );

  wl_dac #(.ROWS(ROWS)) u_dac (.row_en, .bits(ir_rdata), .force1, .rd_in);

  bas_driver #(.ROWS(ROWS), .COLS(COLS), .NFB(NUM_FB)) u_bas (
    .fb(fb_cfg), .op(fb_op), .wr_col, .wr_data(ir_rdata), .rd_in, .wl_v, .bl_v
  );

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (.clk, .wl_v, .bl_v, .bl_i);

  snh #(.COLS(COLS), .IW(CUR_BITS)) u_snh (
    .clk, .sample(snh_sample), .bl_i, .sel(snh_sel), .held
  );

  adc #(.BITS(ADC_BITS), .IW(CUR_BITS)) u_adc (
    .clk, .rst_n, .start(adc_start), .ain(held), .code, .valid(adc_valid)
  );

  shift_add #(.AW(ACC_BITS)) u_sna (
    .in_valid(adc_valid), .code, .shift(sna_shift), .first(sna_first), .addr(sna_addr),
    .or_rdata(or_rdata_a), .or_raddr(or_raddr_a), .or_we(or_we_a), .or_waddr(or_waddr_a),
    .or_wdata(or_wdata_a)
  );

  output_reg #(.DEPTH(OR_DEPTH), .AW(ACC_BITS)) u_or (
    .clk,
    .we_a(or_we_a), .waddr_a(or_waddr_a), .wdata_a(or_wdata_a),
    .we_b(or_we_b), .waddr_b(or_waddr_b), .wdata_b(or_wdata_b),
    .raddr_a(or_raddr_a), .rdata_a(or_rdata_a),
    .raddr_b(or_raddr_b), .rdata_b(or_rdata_b),
    .raddr_c(or_raddr),   .rdata_c(or_rdata)
  );

  max_relu_fb #(.N(MAXN), .W(DATA_BITS)) u_max (
    .clk, .rst_n, .start(mx_start), .relu(mx_relu), .count(mx_count), .elems(mx_elems),
    .busy(mx_busy), .done(mx_done), .result(mx_result)
  );
endmodule
