// tb_tile_ctrl: the tile controller with a real eDRAM and look-up-table unit and
// simple IMA models (IR and OR arrays, a command port that stalls at random).
// Checks eDRAM write/read with response timing, IR loading, OR packing into an
// eDRAM word, command forwarding under stalls, and the softmax flow (logits
// gathered from an OR, x_max from the OR entry the max logic wrote).
module tb_tile_ctrl;
  import hurry_pkg::*;
  localparam int NI = 2, R = 64, ED = 256, SMN = 32;
  logic clk = 0, rst_n = 0;
  tile_cmd_t cmd;
  logic cmd_valid, cmd_ready, rsp_valid;
  logic [BUS_BITS-1:0] rsp_data;
  logic e_we;
  logic [7:0] e_waddr, e_raddr;
  logic [BUS_BITS-1:0] e_wdata, e_rdata;
  ima_cmd_t icmd;
  logic [NI-1:0] icmd_valid, icmd_ready, ir_we, ima_busy;
  logic [8:0] ir_waddr, or_raddr;
  logic [R-1:0] ir_wdata;
  logic [ACC_BITS-1:0] or_rdata [NI];
  logic sm_start, sm_done, sm_busy;
  logic [7:0] sm_x [SMN];
  logic [7:0] sm_xmax;
  logic [5:0] sm_count;
  logic [15:0] sm_y [SMN];
  int checks = 0, failures = 0;

  tile_ctrl #(.NIMA(NI), .ROWS(R), .EDEPTH(ED), .SMN(SMN)) dut (.*);
  edram #(.DEPTH(ED), .WIDTH(BUS_BITS)) u_e (.clk, .we(e_we), .waddr(e_waddr), .wdata(e_wdata), .raddr(e_raddr), .rdata(e_rdata));
  softmax_lut #(.N(SMN)) u_sm (.clk, .rst_n, .start(sm_start), .x(sm_x), .xmax(sm_xmax), .count(sm_count), .busy(sm_busy), .done(sm_done), .y(sm_y));
  always #5 clk = ~clk;

  // IMA models
  logic [R-1:0] irm [NI][512];
  logic [ACC_BITS-1:0] orm [NI][512];
  for (genvar m = 0; m < NI; m++) begin : g_m
    assign or_rdata[m] = orm[m][or_raddr];
    always @(posedge clk) if (ir_we[m]) irm[m][ir_waddr] <= ir_wdata;
  end
  ima_cmd_t got_icmd; int got_ima, n_fwd, n_stall;
  always @(posedge clk) begin
    icmd_ready <= NI'($urandom);
    ima_busy <= NI'($urandom) & NI'($urandom);
    for (int m = 0; m < NI; m++) if (icmd_valid[m] && icmd_ready[m]) begin got_icmd = icmd; got_ima = m; n_fwd++; end
    if (|(icmd_valid & ~icmd_ready)) n_stall++;
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic send(input tile_cmd_t c);
    cmd = c; cmd_valid = 1; #1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask
  function automatic logic [BUS_BITS-1:0] rnd();
    for (int i = 0; i < 16; i++) rnd[32*i +: 32] = $urandom;
  endfunction

  initial begin : watchdog
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [BUS_BITS-1:0] words [8];
  initial begin
    tile_cmd_t c;
    cmd = '0; cmd_valid = 0; n_fwd = 0; n_stall = 0;
    foreach (orm[m, i]) orm[m][i] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // eDRAM writes and reads
    for (int i = 0; i < 8; i++) begin
      words[i] = rnd();
      c = '0; c.op = T_EDRAM_WR; c.addr = 13'(10 + i); c.data = words[i]; send(c);
    end
    for (int i = 0; i < 8; i++) begin
      c = '0; c.op = T_EDRAM_RD; c.addr = 13'(10 + i);
      cmd = c; cmd_valid = 1; #1; @(posedge clk); #1 cmd_valid = 0;
      @(posedge clk); #1;
      chk(rsp_valid && rsp_data == words[i], $sformatf("eDRAM read %0d", i));
    end
    // load IR of IMA 1 from eDRAM[10..17]
    c = '0; c.op = T_LOAD_IR; c.ima = 1; c.addr = 10; c.ir_addr = 40; c.len = 8; send(c);
    for (int i = 0; i < 8; i++) chk(irm[1][40 + i] == words[i][R-1:0], $sformatf("IR load %0d", i));
    // store OR of IMA 0 entries 16..31 into eDRAM[100]
    c = '0; c.op = T_STORE_OR; c.ima = 0; c.or_addr = 16; c.addr = 100; send(c);
    for (int j = 0; j < 16; j++) chk(u_e.mem[100][32*j +: 32] == orm[0][16 + j], $sformatf("OR store %0d", j));
    // forwarding with stalls
    repeat (20) begin
      c = '0; c.op = T_IMA; c.ima = 3'($urandom_range(0, NI-1)); c.icmd.op = I_VMM; c.icmd.a = 9'($urandom); send(c);
      chk(got_ima == int'(c.ima) && got_icmd == c.icmd, "forwarded command");
    end
    chk(n_fwd == 20, "one forward per command");
    chk(n_stall > 0, "IMA stall seen");
    // softmax over OR[1][200..209] >> 4 with x_max in OR[1][300]
    begin
      int mx; real den;
      mx = 0;
      for (int i = 0; i < 10; i++) begin
        orm[1][200 + i] = ACC_BITS'($urandom_range(0, 1200));
        if ((orm[1][200 + i] >> 4) > mx) mx = orm[1][200 + i] >> 4;
      end
      orm[1][300] = ACC_BITS'(mx);
      c = '0; c.op = T_SOFTMAX; c.ima = 1; c.or_addr = 200; c.xmax_addr = 300; c.shift = 4; c.len = 10; c.addr2 = 120; send(c);
      den = 0.0;
      for (int i = 0; i < 10; i++) den += $exp((real'(orm[1][200 + i] >> 4) - real'(mx)) / 16.0);
      for (int i = 0; i < 10; i++) begin
        real r, got;
        r = $exp((real'(orm[1][200 + i] >> 4) - real'(mx)) / 16.0) / den;
        got = real'(u_e.mem[120][16*i +: 16]) / 65536.0;
        chk(got - r < 0.03 && r - got < 0.03, $sformatf("softmax %0d %f exp %f", i, got, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
