// tb_tile: a tile with two IMAs (64x64 arrays, 256-word eDRAM) runs the layer flow of
// hurry_flow.svh on each IMA in turn: eDRAM -> IR, FB programming, Conv + Res VMM,
// Max/ReLU alongside a second VMM, softmax through the look-up table, OR -> eDRAM.
module tb_tile;
  import hurry_pkg::*;
  localparam int NI = 2, R = 64, ED = 256, KR = 20, NO = 4;
  logic clk = 0, rst_n = 0;
  tile_cmd_t cmd;
  logic cmd_valid, cmd_ready, rsp_valid;
  logic [BUS_BITS-1:0] rsp_data;
  logic [NI-1:0] ima_arr_busy, ima_max_busy;
  int checks = 0, failures = 0, n_overlap = 0, n_stall = 0;

  tile #(.NIMA(NI), .ROWS(R), .COLS(R), .EDEPTH(ED)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (|(ima_arr_busy & ima_max_busy)) n_overlap++;
    if (cmd_valid && !cmd_ready) n_stall++;
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic send_cmd(input int t, input tile_cmd_t c);
    cmd = c; cmd_valid = 1; #1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
  endtask
  task automatic read_word(input int t, input int a, output logic [BUS_BITS-1:0] d);
    tile_cmd_t c;
    c = '0; c.op = T_EDRAM_RD; c.addr = 13'(a);
    send_cmd(t, c);
    while (!rsp_valid) @(negedge clk);
    d = rsp_data;
  endtask

  `include "hurry_flow.svh"

  initial begin : watchdog
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd = '0; cmd_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run_layer(0, 0, 11);
    run_layer(0, 1, 22);
    chk(n_overlap > 0, "Max FB worked while the array did a VMM");
    chk(n_stall > 0, "tile stalled a command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
