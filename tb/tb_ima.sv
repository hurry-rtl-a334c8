// tb_ima: one IMA (64x64 array) end to end. Random 8-bit weights for a Conv FB and a
// residual vector for a Res FB placed under it are written column by column through
// the block activation scheme; random 8-bit inputs are applied bit-plane by
// bit-plane; the OR must then hold x.W + res for every output. A Max/ReLU command
// then pools the outputs (with the zero for ReLU) while a second VMM runs, and an
// array command issued meanwhile must stall. Cycle counts of write and VMM are checked.
module tb_ima;
  import hurry_pkg::*;
  localparam int R = 64, C = 64;
  localparam int KR = 24;           // Conv rows (inputs)
  localparam int NO = 4;            // outputs, 8 columns each
  logic clk = 0, rst_n = 0;
  ima_cmd_t cmd;
  logic cmd_valid, cmd_ready, busy, arr_busy, max_busy;
  logic ir_we;
  logic [8:0] ir_waddr, or_raddr;
  logic [R-1:0] ir_wdata;
  logic [ACC_BITS-1:0] or_rdata;
  int checks = 0, failures = 0;

  ima #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic send(input ima_cmd_t c);
    cmd = c; cmd_valid = 1; #1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
  endtask
  task automatic ir_write(input int a, input logic [R-1:0] d);
    @(negedge clk); ir_we = 1; ir_waddr = 9'(a); ir_wdata = d;
    @(negedge clk); ir_we = 0;
  endtask
  int busy_cycles;
  always @(posedge clk) if (arr_busy) busy_cycles++;
  // cycles the array engine was busy for the command just sent
  task automatic wait_arr(output int cyc);
    while (arr_busy) @(negedge clk);
    cyc = busy_cycles;
    busy_cycles = 0;
  endtask

  logic [7:0] w [KR][NO];
  logic [7:0] x [KR];
  logic [7:0] res [NO];
  longint expv [NO];
  int n_stall, n_overlap;
  always @(posedge clk) begin
    if (cmd_valid && !cmd_ready) n_stall++;
    if (arr_busy && max_busy) n_overlap++;
  end

  initial begin : watchdog
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ima_cmd_t c;
    int cyc;
    cmd = '0; cmd_valid = 0; ir_we = 0; ir_waddr = 0; ir_wdata = 0; or_raddr = 0;
    n_stall = 0; n_overlap = 0; busy_cycles = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < KR; r++) for (int o = 0; o < NO; o++) w[r][o] = 8'($urandom);
    for (int o = 0; o < NO; o++) res[o] = 8'($urandom);
    for (int r = 0; r < KR; r++) x[r] = 8'($urandom);
    // FB0 = Conv rows 0..KR-1, FB1 = Res row KR, both on columns 0..8*NO-1
    c = '0; c.op = I_CFG; c.fb = 0; c.cfg = '{r0: 0, r1: KR-1, c0: 0, c1: 8*NO-1}; send(c);
    c.fb = 1; c.cfg = '{r0: KR, r1: KR, c0: 0, c1: 8*NO-1}; send(c);
    c = '0; c.op = I_RESET; c.fb = 0; send(c);
    c.fb = 1; send(c);
    // IR[k] = column k of the Conv FB, IR[32 + k] = column k of the Res FB
    for (int k = 0; k < 8*NO; k++) begin
      logic [R-1:0] d;
      d = '0;
      for (int r = 0; r < KR; r++) d[r] = w[r][k/8][k%8];
      ir_write(k, d);
      d = '0; d[KR] = res[k/8][k%8];
      ir_write(32 + k, d);
    end
    // inputs: IR[100 + p] = bit-plane p
    for (int p = 0; p < 8; p++) begin
      logic [R-1:0] d;
      d = ~'0;                                   // rows outside the Conv FB are ignored
      for (int r = 0; r < KR; r++) d[r] = x[r][p];
      ir_write(100 + p, d);
    end
    busy_cycles = 0;
    c = '0; c.op = I_WRITE; c.fb = 0; c.a = 0; send(c); wait_arr(cyc);
    chk(cyc == 8*NO, $sformatf("write cycles %0d", cyc));
    c.fb = 1; c.a = 32; send(c); wait_arr(cyc);
    c = '0; c.op = I_VMM; c.fb = 0; c.res_en = 1; c.res_fb = 1; c.a = 100; c.b = 0; send(c); wait_arr(cyc);
    chk(cyc == 8 * (1 + 8*NO) + 1, $sformatf("VMM cycles %0d", cyc));
    @(negedge clk);
    for (int o = 0; o < NO; o++) begin
      expv[o] = res[o];
      for (int r = 0; r < KR; r++) expv[o] += x[r] * w[r][o];
      or_raddr = 9'(o); #1;
      chk(or_rdata == ACC_BITS'(expv[o]), $sformatf("out %0d = %0d exp %0d", o, or_rdata, expv[o]));
    end
    // same VMM without Res into OR[8..]
    c = '0; c.op = I_VMM; c.fb = 0; c.a = 100; c.b = 8; send(c);
    // Max/ReLU of OR[0..3] >> 10 runs during it; a further array command stalls
    c = '0; c.op = I_MAX; c.a = 0; c.len = 4; c.shift = 10; c.relu = 1; c.b = 20; send(c);
    c = '0; c.op = I_RESET; c.fb = 3; send(c);
    while (busy) @(negedge clk);
    begin
      longint m;
      m = 0;
      for (int o = 0; o < NO; o++) begin
        longint v;
        v = expv[o] >> 10; if (v > 255) v = 255;
        if (v > m) m = v;
      end
      or_raddr = 9'd20; #1;
      chk(or_rdata == ACC_BITS'(m), $sformatf("max/relu %0d exp %0d", or_rdata, m));
    end
    for (int o = 0; o < NO; o++) begin
      or_raddr = 9'(8 + o); #1;
      chk(or_rdata == ACC_BITS'(expv[o] - res[o]), $sformatf("out w/o res %0d", o));
    end
    chk(n_stall > 0, "stall seen");
    chk(n_overlap > 0, "Max overlapped VMM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
