// tb_output_reg: random traffic on both write ports and all three read ports of the
// output register against a model in which port A wins on the same entry.
module tb_output_reg;
  import hurry_pkg::*;
  logic clk = 0, we_a, we_b;
  logic [8:0] waddr_a, waddr_b, raddr_a, raddr_b, raddr_c;
  logic [31:0] wdata_a, wdata_b, rdata_a, rdata_b, rdata_c;
  logic [31:0] m [512];
  int checks = 0, failures = 0, collisions = 0;
  output_reg dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (m[i]) m[i] = '0;
    repeat (3000) begin
      we_a = 1'($urandom); we_b = 1'($urandom);
      waddr_a = 9'($urandom_range(0, 31)); waddr_b = 9'($urandom_range(0, 31));
      wdata_a = $urandom; wdata_b = $urandom;
      raddr_a = 9'($urandom_range(0, 31)); raddr_b = 9'($urandom_range(0, 31)); raddr_c = 9'($urandom_range(0, 31));
      #1;
      checks += 3;
      if (rdata_a != m[raddr_a]) failures++;
      if (rdata_b != m[raddr_b]) failures++;
      if (rdata_c != m[raddr_c]) failures++;
      @(negedge clk);
      if (we_b) m[waddr_b] = wdata_b;
      if (we_a) m[waddr_a] = wdata_a;
      if (we_a && we_b && waddr_a == waddr_b) collisions++;
    end
    checks++;
    if (collisions == 0) begin failures++; $display("FAIL no write collision exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
