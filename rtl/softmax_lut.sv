// softmax_lut: the tile's look-up-table unit that finishes a softmax.
//
// Once the max logic has found x_max, softmax needs only one exponential and one
// logarithm per output:  y_i = exp(x_i - x_max - ln(sum_j exp(x_j - x_max))).
// Inputs are unsigned Q4.4 (this design uses 8-bit fixed point so that the same
// max logic can compare them). Three phases:
//   1. count cycles: sum += EXP[x_max - x_j]     (EXP[k] = exp(-k/16) in Q0.16)
//   2. one cycle:    L = ln(sum) from the leading-one position e and the next six
//                    bits f of sum:  ln(sum) = e ln2 + ln(1 + f/64), in 1/256 units
//   3. count cycles: y_i = EXP[(x_max - x_i) + round(16 L)], clipped to the table.
// Both tables are computed at elaboration from their formulas (256 and 64 entries).
// Interface: start is taken when idle; done pulses with y[0..count-1] valid
// (2*count + 1 cycles after the start edge). Entries at and above count are zero.
module softmax_lut #(
  parameter int unsigned N = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [7:0]             x     [N],
  input  logic [7:0]             xmax,
  input  logic [$clog2(N+1)-1:0] count,
  output logic                   busy,
  output logic                   done,
  output logic [15:0]            y     [N]
);
  localparam int unsigned CW = $clog2(N+1);
  localparam int unsigned SW = 16 + CW;        // width of the sum

  typedef logic [15:0] exp_tab_t [256];
  typedef logic [7:0]  ln_tab_t  [64];

  function automatic exp_tab_t make_exp();
    exp_tab_t t;
    for (int k = 0; k < 256; k++) begin
      real v;
      v = $exp(-real'(k) / 16.0) * 65536.0;
      t[k] = (v > 65535.0) ? 16'hFFFF : 16'($rtoi(v + 0.5));
    end
    return t;
  endfunction

  function automatic ln_tab_t make_ln();
    ln_tab_t t;
    for (int f = 0; f < 64; f++)
      t[f] = 8'($rtoi($ln(1.0 + real'(f) / 64.0) * 256.0 + 0.5));
    return t;
  endfunction

  localparam exp_tab_t EXP = make_exp();
  localparam ln_tab_t  LNT = make_ln();
  localparam int unsigned LN2_256 = 177;       // round(256 ln 2)

  typedef enum logic [1:0] {S_IDLE, S_SUM, S_LOG, S_OUT} state_t;
  state_t state;

  localparam int unsigned XI = $clog2(N);
  logic [XI-1:0]  i;
  logic [CW-1:0]  n;
  logic [SW-1:0]  sum;
  logic [11:0]    lq;                           // round(16 L), in 1/16 units
  logic [7:0]     xm;

  // difference to the maximum, clipped at zero
  function automatic logic [7:0] diff(logic [7:0] mx, logic [7:0] v);
    return (v > mx) ? 8'd0 : mx - v;
  endfunction

  // leading one position and the six bits below it
  logic [4:0]  lead;
  logic [5:0]  frac;
  logic [15:0] l256;
  always_comb begin
    lead = '0;
    for (int b = 0; b < SW; b++) if (sum[b]) lead = 5'(b);
    frac = 6'({sum, 6'b0} >> lead);
    // sum is Q.16: ln(sum/2^16) = (lead-16) ln2 + ln(1+f/64); lead >= 15 here
    if (lead < 16) l256 = 16'd0;
    else           l256 = 16'((32'(lead) - 16) * LN2_256 + 32'(LNT[frac]));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; i <= '0; n <= '0; sum <= '0; lq <= '0; xm <= '0; done <= 1'b0;
      for (int k = 0; k < N; k++) y[k] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          n <= count; xm <= xmax; i <= '0; sum <= '0;
          for (int k = 0; k < N; k++) y[k] <= '0;
          state <= (count == 0) ? S_LOG : S_SUM;
        end
        S_SUM: begin
          sum <= sum + SW'(EXP[diff(xm, x[i])]);
          if (32'(i) == 32'(n) - 1) begin i <= '0; state <= S_LOG; end
          else i <= i + 1'b1;
        end
        S_LOG: begin
          lq    <= 12'((32'(l256) + 8) >> 4);
          state <= (n == 0) ? S_IDLE : S_OUT;
          done  <= (n == 0);
        end
        S_OUT: begin
          logic [12:0] idx;
          idx = 13'(diff(xm, x[i])) + 13'(lq);
          y[i] <= (idx > 13'd255) ? 16'd0 : EXP[idx[7:0]];
          if (32'(i) == 32'(n) - 1) begin done <= 1'b1; state <= S_IDLE; end
          else i <= i + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
