// tb_io_interface: random host commands to 4 model tiles that accept at random.
// Checks that every command reaches exactly its tile, in order and unchanged, that
// the host is stalled while the addressed tile is busy, and that tile read data is
// returned to the host one cycle later.
module tb_io_interface;
  import hurry_pkg::*;
  localparam int NT = 4;
  logic clk = 0, rst_n = 0;
  chip_cmd_t host_cmd;
  logic host_valid, host_ready, host_rsp_valid;
  logic [BUS_BITS-1:0] host_rsp;
  tile_cmd_t t_cmd;
  logic [NT-1:0] t_valid, t_ready, t_rsp_valid;
  logic [BUS_BITS-1:0] t_rsp [NT];
  int checks = 0, failures = 0, n_stall = 0;
  chip_cmd_t sent [$];

  io_interface #(.NTILE(NT)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    t_ready <= NT'($urandom);
    if (host_valid && !host_ready) n_stall++;
    for (int t = 0; t < NT; t++) if (t_valid[t] && t_ready[t]) begin
      chip_cmd_t e;
      e = sent.pop_front();
      checks++;
      if (e.tile != 4'(t) || e.tcmd != t_cmd) begin failures++; $display("FAIL delivery to tile %0d", t); end
      if ($countones(t_valid) != 1) begin failures++; $display("FAIL several tiles addressed"); end
    end
  end

  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    host_valid = 0; host_cmd = '0; t_rsp_valid = '0;
    foreach (t_rsp[t]) t_rsp[t] = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    repeat (200) begin
      chip_cmd_t c;
      c = '0; c.tile = 4'($urandom_range(0, NT-1)); c.tcmd.op = tile_op_t'($urandom_range(1, 6));
      c.tcmd.addr = 13'($urandom); c.tcmd.data[31:0] = $urandom;
      host_cmd = c; host_valid = 1; #1;
      while (!host_ready) @(negedge clk);
      @(posedge clk); sent.push_back(c); #1 host_valid = 0;
    end
    repeat (20) @(negedge clk);
    checks++; if (sent.size() != 0) begin failures++; $display("FAIL %0d commands not delivered", sent.size()); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    // responses
    for (int t = 0; t < NT; t++) begin
      logic [BUS_BITS-1:0] v;
      v = '0; v[63:0] = {$urandom, $urandom};
      @(negedge clk); t_rsp[t] = v; t_rsp_valid = '0; t_rsp_valid[t] = 1;
      @(negedge clk); t_rsp_valid = '0;
      checks++;
      if (!host_rsp_valid || host_rsp != v) begin failures++; $display("FAIL response from tile %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
