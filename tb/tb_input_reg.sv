// tb_input_reg: random writes and reads of the 32 KB input register against a model.
module tb_input_reg;
  import hurry_pkg::*;
  logic clk = 0, we;
  logic [8:0] waddr, raddr;
  logic [511:0] wdata, rdata;
  logic [511:0] m [512];
  int checks = 0, failures = 0;
  input_reg dut (.*);
  always #5 clk = ~clk;
  function automatic logic [511:0] rnd();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction
  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (m[i]) m[i] = '0;
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (2000) begin
      we = 1'($urandom); waddr = 9'($urandom); wdata = rnd(); raddr = 9'($urandom);
      #1;
      checks++;
      if (rdata != m[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      @(negedge clk);
      if (we) m[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
