// max_relu_fb: Max-pooling / ReLU functional block (step-wise tournament).
//
// The elements of one pooling window are written into the Max FB and reduced by a
// knock-out tournament: in each round neighbouring pairs are compared and the
// larger survives (one max_logic pass, 16 cycles, all pairs of a round in
// parallel as separate columns of the FB), and an odd element out passes to the
// next round unchanged. For ReLU, zero is added as one more contestant, so the
// result is max(0, elements); with a single element this is plain ReLU, with a
// window it is ReLU merged into max pooling, which is how the two FBs share one
// tournament. With rounds = ceil(log2(count + relu)), done comes 19 x rounds + 1
// cycles after the start edge (per round: set up, start the lanes, 16 max-logic
// steps, collect the winners). count may be 1..N.
// Interface: start is taken when busy is low; done pulses once with result valid.
module max_relu_fb #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       relu,
  input  logic [$clog2(N+1)-1:0]     count,
  input  logic [W-1:0]               elems [N],
  output logic                       busy,
  output logic                       done,
  output logic [W-1:0]               result
);
  localparam int unsigned NP    = N + 1;          // contestants incl. the zero
  localparam int unsigned LANES = (NP + 1) / 2;
  localparam int unsigned CW    = $clog2(NP + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_WAIT} state_t;
  state_t state;

  logic [W-1:0] v [NP];
  logic [CW-1:0] cnt;
  logic [LANES-1:0] lane_start, lane_done;
  logic [W-1:0] lane_m [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic lane_busy, lane_gt;
    max_logic #(.W(W)) u_max (
      .clk, .rst_n,
      .start (lane_start[l]),
      .a     (v[2*l]),
      .b     ((2*l + 1 < NP) ? v[2*l+1] : '0),
      .busy  (lane_busy),
      .done  (lane_done[l]),
      .gt    (lane_gt),
      .m     (lane_m[l])
    );
  end

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++)
      lane_start[l] = (state == S_RUN) && (2*l + 1 < 32'(cnt));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cnt    <= '0;
      done   <= 1'b0;
      result <= '0;
      for (int unsigned i = 0; i < NP; i++) v[i] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int unsigned i = 0; i < NP; i++)
            v[i] <= (i < 32'(count) && i < N) ? elems[i] : '0;
          cnt   <= CW'(count) + CW'(relu);   // the zero sits right after the elements
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt <= 1) begin
            result <= v[0];
            done   <= 1'b1;
            state  <= S_IDLE;
          end else state <= S_RUN;
        end
        S_RUN: state <= S_WAIT;
        S_WAIT: if (lane_done[0]) begin
          // winners of pairs move to the front; an odd last contestant follows
          for (int unsigned l = 0; l < LANES; l++) begin
            if (2*l + 1 < 32'(cnt))      v[l] <= lane_m[l];
            else if (2*l < 32'(cnt))     v[l] <= v[2*l];
          end
          cnt   <= CW'((32'(cnt) + 1) / 2);
          state <= S_LOAD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
