// hurry_chip_tb_body.svh: body shared by the reduced and the full-size chip
// testbenches. Expects clk, rst_n, the chip's ports, NT, NI, R, KR, NO, checks,
// failures, n_overlap and n_stall to be declared by the including module.
  always #5 clk = ~clk;
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) if (|(arr_busy[t] & max_busy[t])) n_overlap++;
    if (host_valid && !host_ready) n_stall++;
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic send_cmd(input int t, input tile_cmd_t c);
    host_cmd.tile = 4'(t); host_cmd.tcmd = c; host_valid = 1; #1;
    while (!host_ready) @(negedge clk);
    @(posedge clk); #1 host_valid = 0;
  endtask
  task automatic read_word(input int t, input int a, output logic [BUS_BITS-1:0] d);
    tile_cmd_t c;
    c = '0; c.op = T_EDRAM_RD; c.addr = 13'(a);
    send_cmd(t, c);
    while (!host_rsp_valid) @(negedge clk);
    d = host_rsp;
  endtask

  `include "hurry_flow.svh"

  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    host_cmd = '0; host_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run_layer(0, 0, 5);
    run_layer(NT - 1, NI - 1, 6);
    chk(n_res > 0,     "Conv+Res merged VMM ran");
    chk(n_relu > 0,    "ReLU ran");
    chk(n_softmax > 0, "softmax ran");
    chk(n_overlap > 0, "Max FB overlapped a VMM");
    chk(n_stall > 0,   "host command stalled");
    $display("mechanisms: res=%0d relu=%0d softmax=%0d overlap_cycles=%0d stall_cycles=%0d",
             n_res, n_relu, n_softmax, n_overlap, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
