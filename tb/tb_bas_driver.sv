// tb_bas_driver: checks the BAS line voltages, first on the 4x4 two-FB example of
// the scheme (reset FB1; write FB1 column 0 while FB2 reads; write column 1), then
// on random FB operations against a reference written from the rules.
module tb_bas_driver;
  import hurry_pkg::*;
  localparam int R = 8, C = 8, NF = 2;
  fb_cfg_t fb [NF];
  fb_op_t  op [NF];
  logic [IDX_BITS-1:0] wr_col;
  logic [R-1:0] wr_data, rd_in;
  volt_t wl_v [R];
  volt_t bl_v [C];
  int checks = 0, failures = 0;

  bas_driver #(.ROWS(R), .COLS(C), .NFB(NF)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic volt_t ref_wl(int r);
    bit rs = 0, w = 0, rd = 0;
    for (int f = 0; f < NF; f++) if (r >= fb[f].r0 && r <= fb[f].r1) begin
      rs |= op[f] == FB_RESET; w |= op[f] == FB_WRITE; rd |= op[f] == FB_READ;
    end
    if (rs) return V_RESET;
    if (w)  return wr_data[r] ? V_SET : V_2THIRD;
    if (rd) return rd_in[r] ? V_2THIRD : V_THIRD;
    return V_THIRD;
  endfunction
  function automatic volt_t ref_bl(int c);
    for (int f = 0; f < NF; f++) if (c >= fb[f].c0 && c <= fb[f].c1) begin
      if (op[f] == FB_RESET) return V_GND;
      if (op[f] == FB_WRITE && c == wr_col) return V_GND;
    end
    return V_THIRD;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // FB1 rows 0-3 cols 0-1, FB2 rows 0-3 cols 2-3
    fb[0] = '{r0: 0, r1: 3, c0: 0, c1: 1};
    fb[1] = '{r0: 0, r1: 3, c0: 2, c1: 3};
    rd_in = '0; wr_col = 0; wr_data = '0;
    // cycle 1: reset FB1
    op[0] = FB_RESET; op[1] = FB_IDLE; #1;
    for (int r = 0; r < 4; r++) chk(wl_v[r] == V_RESET, "reset WL");
    chk(bl_v[0] == V_GND && bl_v[1] == V_GND, "reset BL GND");
    // cycle 2: write column 0 with 0,0,1,1 (rows 0..3) while FB2 reads
    op[0] = FB_WRITE; op[1] = FB_READ; wr_col = 0; wr_data = 8'b1100; #1;
    chk(wl_v[0] == V_2THIRD && wl_v[1] == V_2THIRD && wl_v[2] == V_SET && wl_v[3] == V_SET, "cycle2 WL");
    chk(bl_v[0] == V_GND && bl_v[1] == V_THIRD && bl_v[2] == V_THIRD && bl_v[3] == V_THIRD, "cycle2 BL");
    // cycle 3: write column 1 with 0,1,0,1
    wr_col = 1; wr_data = 8'b1010; #1;
    chk(wl_v[0] == V_2THIRD && wl_v[1] == V_SET && wl_v[2] == V_2THIRD && wl_v[3] == V_SET, "cycle3 WL");
    chk(bl_v[0] == V_THIRD && bl_v[1] == V_GND && bl_v[2] == V_THIRD && bl_v[3] == V_THIRD, "cycle3 BL");
    // read alone: input bits set the read level
    op[0] = FB_IDLE; op[1] = FB_READ; rd_in = 8'b0101; #1;
    chk(wl_v[0] == V_2THIRD && wl_v[1] == V_THIRD && wl_v[2] == V_2THIRD && wl_v[3] == V_THIRD, "read WL");
    chk(wl_v[5] == V_THIRD, "idle row");
    // random
    repeat (300) begin
      for (int f = 0; f < NF; f++) begin
        int a, b, x, y;
        a = $urandom_range(0, R-1); b = $urandom_range(0, R-1);
        x = $urandom_range(0, C-1); y = $urandom_range(0, C-1);
        fb[f].r0 = IDX_BITS'(a < b ? a : b); fb[f].r1 = IDX_BITS'(a < b ? b : a);
        fb[f].c0 = IDX_BITS'(x < y ? x : y); fb[f].c1 = IDX_BITS'(x < y ? y : x);
        op[f] = fb_op_t'($urandom_range(0, 3));
      end
      wr_col = IDX_BITS'($urandom_range(0, C-1));
      wr_data = R'($urandom); rd_in = R'($urandom);
      #1;
      for (int r = 0; r < R; r++) chk(wl_v[r] == ref_wl(r), $sformatf("rand WL %0d", r));
      for (int c = 0; c < C; c++) chk(bl_v[c] == ref_bl(c), $sformatf("rand BL %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
