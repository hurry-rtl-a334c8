// tb_adc: random currents, including values past full scale; checks the code,
// the clipping at 511 and the one-cycle latency of valid.
module tb_adc;
  import hurry_pkg::*;
  logic clk = 0, rst_n = 0, start;
  logic [CUR_BITS-1:0] ain;
  logic [ADC_BITS-1:0] code;
  logic valid;
  int checks = 0, failures = 0;
  adc #(.BITS(ADC_BITS), .IW(CUR_BITS)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; ain = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (300) begin
      int v;
      v = $urandom_range(0, 1100);
      ain = CUR_BITS'(v); start = 1;
      @(negedge clk);
      start = 0; ain = '0;
      chk(valid, "valid after 1 cycle");
      chk(code == ADC_BITS'(v > 511 ? 511 : v), $sformatf("code for %0d got %0d", v, code));
      @(negedge clk);
      chk(!valid, "valid only one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
