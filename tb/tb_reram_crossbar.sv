// tb_reram_crossbar: programs random 1-bit matrices through set/reset voltages,
// checks that half-selected cells (2/3 Vset or less) keep their state, and checks
// every bitline current against the vector-matrix product computed here.
module tb_reram_crossbar;
  import hurry_pkg::*;
  localparam int R = 16, C = 8;
  logic clk = 0;
  volt_t wl_v [R];
  volt_t bl_v [C];
  logic [CUR_BITS-1:0] bl_i [C];
  logic [R-1:0] m [C];     // expected cells
  int checks = 0, failures = 0;

  reram_crossbar #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic idle();
    foreach (wl_v[r]) wl_v[r] = V_THIRD;
    foreach (bl_v[c]) bl_v[c] = V_THIRD;
  endtask

  task automatic read_check(input logic [R-1:0] x);
    foreach (wl_v[r]) wl_v[r] = x[r] ? V_2THIRD : V_THIRD;
    foreach (bl_v[c]) bl_v[c] = V_THIRD;
    #1;
    for (int c = 0; c < C; c++) chk(bl_i[c] == CUR_BITS'($countones(m[c] & x)), $sformatf("read col %0d", c));
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    repeat (5) begin
      // reset the whole array
      foreach (wl_v[r]) wl_v[r] = V_RESET;
      foreach (bl_v[c]) bl_v[c] = V_GND;
      @(negedge clk);
      foreach (m[c]) m[c] = '0;
      read_check('1);
      // write each column: Vset rows for 1, 2/3 Vset for 0, column at GND
      for (int c = 0; c < C; c++) begin
        logic [R-1:0] d;
        d = R'($urandom);
        foreach (wl_v[r]) wl_v[r] = d[r] ? V_SET : V_2THIRD;
        foreach (bl_v[k]) bl_v[k] = (k == c) ? V_GND : V_THIRD;
        @(negedge clk);
        m[c] = d;
      end
      repeat (10) read_check(R'($urandom));
      // disturb test: Vset on all rows with every BL at 1/3 Vset changes nothing
      foreach (wl_v[r]) wl_v[r] = V_SET;
      foreach (bl_v[c]) bl_v[c] = V_THIRD;
      @(negedge clk);
      read_check('1);
      // 2/3 Vset rows with a grounded column change nothing either
      foreach (wl_v[r]) wl_v[r] = V_2THIRD;
      foreach (bl_v[c]) bl_v[c] = V_GND;
      @(negedge clk);
      read_check('1);
    end
    // Vset rows read at 1/3 BL count two units per ON cell
    foreach (wl_v[r]) wl_v[r] = V_SET;
    foreach (bl_v[c]) bl_v[c] = V_THIRD;
    #1;
    for (int c = 0; c < C; c++) chk(bl_i[c] == CUR_BITS'(2 * $countones(m[c])), "2-unit read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
