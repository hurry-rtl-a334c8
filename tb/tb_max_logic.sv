// tb_max_logic: exhaustive 2-bit compare-and-select (the size of the worked example,
// 11 + 5 = 16 cycles) and random 8-bit pairs; checks gt, the maximum and that done
// arrives exactly 16 cycles after start.
module tb_max_logic;
  logic clk = 0, rst_n = 0;
  logic s2, s8, b2, b8, d2, d8, g2, g8;
  logic [1:0] a2, bb2, m2;
  logic [7:0] a8, bb8, m8;
  int checks = 0, failures = 0;

  max_logic #(.W(2)) u2 (.clk, .rst_n, .start(s2), .a(a2), .b(bb2), .busy(b2), .done(d2), .gt(g2), .m(m2));
  max_logic #(.W(8)) u8 (.clk, .rst_n, .start(s8), .a(a8), .b(bb8), .busy(b8), .done(d8), .gt(g8), .m(m8));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s2 = 0; s8 = 0; a2 = 0; bb2 = 0; a8 = 0; bb8 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int x = 0; x < 4; x++) for (int y = 0; y < 4; y++) begin
      int cyc;
      a2 = 2'(x); bb2 = 2'(y); s2 = 1;
      @(negedge clk); s2 = 0; a2 = '0; bb2 = '0; cyc = 0;
      while (!d2) begin @(negedge clk); cyc++; end
      chk(cyc == 16, $sformatf("2-bit latency %0d", cyc));
      chk(g2 == (x > y), $sformatf("gt %0d %0d", x, y));
      chk(m2 == 2'(x > y ? x : y), $sformatf("max %0d %0d -> %0d", x, y, m2));
    end
    repeat (200) begin
      int x, y, cyc;
      x = $urandom_range(0, 255); y = ($urandom_range(0, 3) == 0) ? x : $urandom_range(0, 255);
      a8 = 8'(x); bb8 = 8'(y); s8 = 1;
      @(negedge clk); s8 = 0; cyc = 0;
      chk(b8, "busy");
      while (!d8) begin @(negedge clk); cyc++; end
      chk(cyc == 16, $sformatf("8-bit latency %0d", cyc));
      chk(g8 == (x > y), $sformatf("gt %0d %0d", x, y));
      chk(m8 == 8'(x > y ? x : y), $sformatf("max %0d %0d -> %0d", x, y, m8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
