// max_logic: in-memory compare-and-select ("max logic") of two W-bit values.
//
// The Max, ReLU and softmax FBs find a maximum by running logic inside the ReRAM
// array: each step applies one stateful cell operation (INV, XOR, COPY or NOR) on
// some bitlines and leaves its result in a fresh cell. Bit k of A and B sits on
// bitline k; one extra bitline (index W) holds the comparison. The 16 steps are:
//   1  INV  A'          2  INV  B'          3-4  XOR  x_k = A_k ^ B_k
//   5-6  COPY the higher-bit XORs onto every lower bitline
//   7  NOR  t_k = NOR(A'_k, B_k, x_j for j > k)     ( = A_k & ~B_k & higher bits equal)
//   8  NOR  on bitline W: n = NOR(t_0 .. t_{W-1})   ( = not A>B)
//   9  INV  gt = A>B
//   10-11 COPY n onto every bitline     12  INV  gt back on every bitline
//   13 NOR  s_k = NOR(A'_k, n) = A_k & gt           14 NOR  u_k = NOR(B'_k, gt) = B_k & ~gt
//   15 NOR  NOR(s_k, u_k)                           16 INV  M_k = max(A,B)_k
// Steps 1-11 compare and 12-16 select: 11 + 5 cycles, as in the 2-bit example of the
// design. For W > 2 the same steps act on all bitlines at once (multi-input NOR in
// steps 7 and 8), so the latency stays 16 cycles; that generalisation is this
// implementation's. Cells are modelled by flip-flops. Ties select B (equal values).
// Interface: start is taken when busy is low; done pulses 16 cycles after the start
// edge, with gt and m valid from then until the next start.
module max_logic #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic         gt,
  output logic [W-1:0] m
);
  localparam int unsigned STEPS = 16;

  logic [4:0]   st;                       // 0 idle, else step being executed
  logic [W-1:0] ca, cb;                   // operand cells
  logic [W-1:0] na, nb, x, xc, t, ngt_c, gt_c, s, u, nm;
  logic         n;

  assign busy = (st != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= '0; done <= 1'b0; gt <= 1'b0; m <= '0;
      ca <= '0; cb <= '0; na <= '0; nb <= '0; x <= '0; xc <= '0; t <= '0;
      n <= 1'b0; ngt_c <= '0; gt_c <= '0; s <= '0; u <= '0; nm <= '0;
    end else begin
      done <= 1'b0;
      if (st == 0) begin
        if (start) begin
          ca <= a; cb <= b; st <= 5'd1;
        end
      end else begin
        st <= (st == 5'(STEPS)) ? 5'd0 : st + 5'd1;
        case (st)
          5'd1:  na <= ~ca;
          5'd2:  nb <= ~cb;
          5'd4:  x  <= ca ^ cb;            // XOR occupies steps 3-4
          5'd6:  xc <= x;                  // COPY occupies steps 5-6
          5'd7:  for (int k = 0; k < W; k++) begin
                   logic hi;
                   hi = 1'b0;
                   for (int j = k + 1; j < W; j++) hi |= xc[j];
                   t[k] <= ~(na[k] | cb[k] | hi);
                 end
          5'd8:  n  <= ~(|t);
          5'd9:  gt <= ~n;
          5'd11: ngt_c <= {W{n}};          // COPY occupies steps 10-11
          5'd12: gt_c  <= ~ngt_c;
          5'd13: s  <= ~(na | ngt_c);
          5'd14: u  <= ~(nb | gt_c);
          5'd15: nm <= ~(s | u);
          5'd16: begin m <= ~nm; done <= 1'b1; end
          default: ;
        endcase
      end
    end
  end
endmodule
