// tb_softmax_lut: random Q4.4 vectors; the maximum is found here, the outputs are
// compared with softmax computed in floating point (tolerance 0.03 absolute, from
// the 1/16 table step), and the sum of the outputs must be close to 1.
module tb_softmax_lut;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [7:0] x [N];
  logic [7:0] xmax;
  logic [5:0] count;
  logic [15:0] y [N];
  int checks = 0, failures = 0;
  softmax_lut #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin : watchdog
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; xmax = 0; count = 0;
    foreach (x[i]) x[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (60) begin
      int n, cyc, mx;
      real den, s;
      n = $urandom_range(1, N);
      mx = 0;
      foreach (x[i]) begin
        x[i] = 8'($urandom_range(0, 80));
        if (i < n && x[i] > mx) mx = x[i];
      end
      xmax = 8'(mx); count = 6'(n); start = 1;
      @(negedge clk); start = 0; cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == 2 * n + 1, $sformatf("latency %0d n %0d", cyc, n));
      den = 0.0;
      for (int i = 0; i < n; i++) den += $exp((real'(x[i]) - real'(mx)) / 16.0);
      s = 0.0;
      for (int i = 0; i < n; i++) begin
        real r, got;
        r = $exp((real'(x[i]) - real'(mx)) / 16.0) / den;
        got = real'(y[i]) / 65536.0;
        s += got;
        chk(got - r < 0.03 && r - got < 0.03, $sformatf("y[%0d] %f exp %f", i, got, r));
      end
      chk(s > 0.9 && s < 1.1, $sformatf("sum %f", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
