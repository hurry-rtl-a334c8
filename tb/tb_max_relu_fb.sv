// tb_max_relu_fb: random pooling windows of 1..16 elements with and without ReLU
// (which adds a zero contestant); checks the winner and the tournament latency of
// 19 cycles per round (load, start, 16 steps, collect) plus 1.
module tb_max_relu_fb;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, start, relu, busy, done;
  logic [4:0] count;
  logic [7:0] elems [N];
  logic [7:0] result;
  int checks = 0, failures = 0;
  max_relu_fb #(.N(N), .W(8)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin : watchdog
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; relu = 0; count = 0;
    foreach (elems[i]) elems[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (120) begin
      int n, mx, cyc, rounds, k;
      n = $urandom_range(1, N);
      relu = 1'($urandom);
      mx = relu ? 0 : -1;
      foreach (elems[i]) begin
        // small values so that ReLU's zero sometimes matters when all are 0
        elems[i] = ($urandom_range(0, 4) == 0) ? 8'd0 : 8'($urandom);
        if (i < n && int'(elems[i]) > mx) mx = elems[i];
      end
      count = 5'(n); start = 1;
      @(negedge clk); start = 0; cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      rounds = 0; k = n + relu;
      while (k > 1) begin k = (k + 1) / 2; rounds++; end
      chk(result == 8'(mx), $sformatf("n=%0d relu=%0d result %0d exp %0d", n, relu, result, mx));
      chk(cyc == 19 * rounds + 1, $sformatf("latency %0d rounds %0d", cyc, rounds));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
