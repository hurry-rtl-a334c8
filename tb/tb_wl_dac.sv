// tb_wl_dac: random bit-planes, row enables and forced rows against (en & bits) | force.
module tb_wl_dac;
  localparam int R = 64;
  logic [R-1:0] row_en, bits, force1, rd_in;
  int checks = 0, failures = 0;
  wl_dac #(.ROWS(R)) dut (.*);
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (200) begin
      row_en = {$urandom, $urandom}; bits = {$urandom, $urandom}; force1 = {$urandom, $urandom} & {$urandom, $urandom};
      #1;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (rd_in[r] != ((row_en[r] && bits[r]) || force1[r])) begin failures++; $display("FAIL row %0d", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
