// tb_snh: samples random bitline currents, then changes them without sampling and
// checks that every column still holds the sampled value.
module tb_snh;
  import hurry_pkg::*;
  localparam int C = 16;
  logic clk = 0, sample;
  logic [CUR_BITS-1:0] bl_i [C];
  logic [CUR_BITS-1:0] exp_v [C];
  logic [IDX_BITS-1:0] sel;
  logic [CUR_BITS-1:0] held;
  int checks = 0, failures = 0;
  snh #(.COLS(C), .IW(CUR_BITS)) dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    sample = 0; sel = 0;
    repeat (20) begin
      @(negedge clk);
      foreach (bl_i[c]) begin bl_i[c] = CUR_BITS'($urandom); exp_v[c] = bl_i[c]; end
      sample = 1; @(negedge clk); sample = 0;
      foreach (bl_i[c]) bl_i[c] = CUR_BITS'($urandom);
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        sel = IDX_BITS'(c); #1;
        checks++;
        if (held != exp_v[c]) begin failures++; $display("FAIL col %0d %0d != %0d", c, held, exp_v[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
