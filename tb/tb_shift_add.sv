// tb_shift_add: drives the shift-and-add unit with a bit-serial, bit-sliced dot
// product (8 input bit-planes x 8 weight columns) against a model OR, and compares
// the final sum with the integer product computed directly.
module tb_shift_add;
  import hurry_pkg::*;
  logic in_valid, first;
  logic [ADC_BITS-1:0] code;
  logic [3:0] shift;
  logic [8:0] addr, or_raddr, or_waddr;
  logic [ACC_BITS-1:0] or_rdata, or_wdata;
  logic or_we;
  logic [ACC_BITS-1:0] orm [512];
  int checks = 0, failures = 0;
  shift_add #(.AW(ACC_BITS)) dut (.*);
  assign or_rdata = orm[or_raddr];
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (orm[i]) orm[i] = ACC_BITS'($urandom);   // stale contents must be ignored
    in_valid = 0; first = 0; code = 0; shift = 0; addr = 0;
    repeat (50) begin
      int n;
      logic [7:0] x [64];
      logic [7:0] w [64];
      longint expv;
      int a;
      n = $urandom_range(1, 60);
      a = $urandom_range(0, 511);
      expv = 0;
      for (int i = 0; i < n; i++) begin x[i] = 8'($urandom); w[i] = 8'($urandom); expv += x[i] * w[i]; end
      for (int p = 0; p < 8; p++)
        for (int j = 0; j < 8; j++) begin
          int cnt;
          cnt = 0;
          for (int i = 0; i < n; i++) cnt += x[i][p] & w[i][j];
          in_valid = 1; code = ADC_BITS'(cnt); shift = 4'(p + j); first = (p == 0 && j == 0); addr = 9'(a);
          #1;
          if (or_we) orm[or_waddr] = or_wdata;
          #1;
        end
      in_valid = 0; #1;
      checks++;
      if (orm[a] != ACC_BITS'(expv)) begin failures++; $display("FAIL sum %0d != %0d", orm[a], expv); end
    end
    // no write without a valid code
    in_valid = 0; #1; checks++; if (or_we) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
