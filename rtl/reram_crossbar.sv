// reram_crossbar: behavioural model of the ROWS x COLS array of 1-bit ReRAM cells.
//
// This is a model of an analog part, not synthesizable logic for it. Each cell is 0
// (high resistance) or 1 (low resistance). On every clock edge a cell whose wordline
// is at Vset and bitline at GND (a full Vset across it) is set to 1; one whose
// wordline is at Vreset and bitline at GND is reset to 0. Any smaller drop, at most
// 2/3 Vset under the third-voltage scheme, leaves it unchanged.
// The bitline current bl_i is combinational: the sum over all rows of cell value
// times the voltage across the cell (WL above BL) counted in thirds of Vset. With
// read levels (WL 2/3 or 1/3 Vset, BL 1/3 Vset) it is the number of ON cells on
// rows whose input bit is 1, i.e. a 1-bit vector-matrix product. Sneak paths, wire
// resistance and device noise are not modelled. Cells start at 0 (no reset input:
// a ReRAM array keeps its state, the model starts from a formed, erased array).
module reram_crossbar
  import hurry_pkg::*;
#(
  parameter int unsigned ROWS = ARR_ROWS,
  parameter int unsigned COLS = ARR_COLS
) (
  input  logic                clk,
  input  volt_t               wl_v [ROWS],
  input  volt_t               bl_v [COLS],
  output logic [CUR_BITS-1:0] bl_i [COLS]
);

  // Column-major storage: cells[c][r].
  logic [ROWS-1:0] cells [COLS];

  initial begin
    for (int unsigned c = 0; c < COLS; c++) cells[c] = '0;
  end

  always_ff @(posedge clk) begin
    for (int unsigned c = 0; c < COLS; c++) begin
      if (bl_v[c] == V_GND) begin
        for (int unsigned r = 0; r < ROWS; r++) begin
          if (wl_v[r] == V_SET)   cells[c][r] <= 1'b1;
          if (wl_v[r] == V_RESET) cells[c][r] <= 1'b0;
        end
      end
    end
  end

  // Row drive in thirds of Vset, for rows at a positive read/write level.
  function automatic int unsigned level(volt_t v);
    case (v)
      V_THIRD:  return 1;
      V_2THIRD: return 2;
      V_SET:    return 3;
      default:  return 0;
    endcase
  endfunction

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      int unsigned sum, blv;
      sum = 0;
      blv = level(bl_v[c]);
      for (int unsigned r = 0; r < ROWS; r++) begin
        int unsigned wlv;
        wlv = level(wl_v[r]);
        if (cells[c][r] && wlv > blv) sum += wlv - blv;
      end
      bl_i[c] = (sum > (1 << CUR_BITS) - 1) ? CUR_BITS'((1 << CUR_BITS) - 1) : CUR_BITS'(sum);
    end
  end

endmodule
