// tb_ima_ctrl: drives the IMA controller alone and checks its control sequences:
// FB configuration, a reset (1 cycle), a write (one column per cycle, IR address and
// column advancing together), a VMM with a merged Res FB (8 samples, one ADC start
// per column per bit-plane, Res rows forced only in bit-plane 0, shift-and-add
// controls), the Max engine (clipping of OR entries, result write-back) running
// during a VMM, and the stall of a second array command while the array is busy.
module tb_ima_ctrl;
  import hurry_pkg::*;
  localparam int R = 16, C = 16, NF = 4, MAXN = 16;
  logic clk = 0, rst_n = 0;
  ima_cmd_t cmd;
  logic cmd_valid, cmd_ready, busy;
  fb_cfg_t fb_cfg [NF];
  fb_op_t fb_op [NF];
  logic [IDX_BITS-1:0] wr_col, snh_sel;
  logic [R-1:0] row_en, force1;
  logic [8:0] ir_raddr, sna_addr, or_raddr_b, or_waddr_b;
  logic snh_sample, adc_start, sna_first, or_we_b, mx_start, mx_relu, arr_busy, max_busy;
  logic [3:0] sna_shift;
  logic [ACC_BITS-1:0] or_rdata_b, or_wdata_b;
  logic [4:0] mx_count;
  logic [7:0] mx_elems [MAXN];
  logic mx_done;
  logic [7:0] mx_result;
  int checks = 0, failures = 0;

  ima_ctrl #(.ROWS(R), .COLS(C), .NFB(NF), .MAXN(MAXN)) dut (.*);
  always #5 clk = ~clk;

  // OR model for port B: entry i holds 100*i + 7
  assign or_rdata_b = ACC_BITS'(100 * or_raddr_b + 7);

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input ima_cmd_t c);
    cmd = c; cmd_valid = 1;
    #1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  // Max FB model: answers 5 cycles after start with the largest element
  initial begin
    mx_done = 0; mx_result = 0;
    forever begin
      @(posedge clk);
      if (mx_start) begin
        logic [7:0] m;
        m = 0;
        for (int i = 0; i < int'(mx_count); i++) if (mx_elems[i] > m) m = mx_elems[i];
        repeat (4) @(posedge clk);
        #1 mx_done = 1; mx_result = m;
        @(posedge clk); #1 mx_done = 0;
      end
    end
  end

  // monitors
  int n_write, n_reset, n_sample, n_adc, n_force, n_bad_wr, n_stall, n_overlap;
  always @(posedge clk) if (rst_n) begin
    if (fb_op[0] == FB_WRITE) begin
      n_write++;
      if (32'(wr_col) != 4 + (n_write - 1) || 32'(ir_raddr) != 20 + (n_write - 1)) n_bad_wr++;
    end
    if (fb_op[0] == FB_RESET) n_reset++;
    if (snh_sample) begin
      n_sample++;
      if (force1 != 0) n_force++;
      if (row_en != R'(16'h00FF)) n_bad_wr++;
      if (fb_op[1] != FB_READ) n_bad_wr++;
    end
    if (adc_start) n_adc++;
    if (cmd_valid && !cmd_ready) n_stall++;
    if (arr_busy && max_busy) n_overlap++;
  end

  // shift-and-add controls: expected sequence for FB0 (8 columns) into OR[40]
  int n_sna, n_sna_bad;
  logic adc_d;
  always @(posedge clk) begin
    adc_d <= adc_start;
    if (adc_d) begin
      int p, k;
      p = n_sna / 8; k = n_sna % 8;
      if (sna_shift != 4'(p + k) || sna_first != (p == 0 && k == 0) || sna_addr != 9'(40)) n_sna_bad++;
      n_sna++;
    end
  end

  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ima_cmd_t c;
    int t0;
    cmd = '0; cmd_valid = 0;
    n_write = 0; n_reset = 0; n_sample = 0; n_adc = 0; n_force = 0; n_bad_wr = 0; n_stall = 0; n_overlap = 0; n_sna = 0; n_sna_bad = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // FB0 rows 0-7 cols 4-11 (Conv), FB1 rows 8-8 cols 4-11 (Res)
    c = '0; c.op = I_CFG; c.fb = 0; c.cfg = '{r0: 0, r1: 7, c0: 4, c1: 11}; send(c);
    c.fb = 1; c.cfg = '{r0: 8, r1: 8, c0: 4, c1: 11}; send(c);
    chk(fb_cfg[0].c0 == 4 && fb_cfg[1].r0 == 8, "cfg stored");
    c = '0; c.op = I_RESET; c.fb = 0; send(c);
    repeat (2) @(negedge clk); chk(n_reset == 1, "reset one cycle");
    c = '0; c.op = I_WRITE; c.fb = 0; c.a = 20; send(c);
    t0 = $time;
    while (busy) @(negedge clk);
    chk(n_write == 8, $sformatf("write cycles %0d", n_write));
    chk(n_bad_wr == 0, "write column/IR address sequence");
    // VMM with Res
    c = '0; c.op = I_VMM; c.fb = 0; c.res_en = 1; c.res_fb = 1; c.a = 50; c.b = 40; send(c);
    t0 = $time;
    // Max runs alongside
    c = '0; c.op = I_MAX; c.a = 3; c.len = 4; c.shift = 2; c.b = 100; send(c);
    // a second array command must stall until the VMM is done
    c = '0; c.op = I_RESET; c.fb = 2; send(c);
    chk(n_stall > 0, "array command stalled");
    chk(n_overlap > 0, "Max engine overlapped the VMM");
    while (busy) @(negedge clk);
    chk(n_sample == 8, $sformatf("samples %0d", n_sample));
    chk(n_force == 1, $sformatf("Res rows forced in %0d planes", n_force));
    chk(n_adc == 64, $sformatf("adc starts %0d", n_adc));
    chk(n_sna == 64 && n_sna_bad == 0, $sformatf("shift-and-add controls %0d bad %0d", n_sna, n_sna_bad));
    chk(n_bad_wr == 0, "read rows");
    // max result: OR[3..6] = 307,407,507,607 >>2 = 76,101,126,151 -> 151
    chk(mx_elems[0] == 8'd76 && mx_elems[3] == 8'd151, "Max inputs shifted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result write-back
  always @(posedge clk) if (or_we_b) begin
    checks++;
    if (or_waddr_b != 9'd100 || or_wdata_b != 32'd151) begin failures++; $display("FAIL max write-back"); end
  end
endmodule
