// adc: behavioural model of the 9-bit bitline ADC.
//
// This models a mixed-signal part. A conversion is started by start; one cycle
// later code holds the input current (in units of one ON cell read at 1/3 Vset)
// rounded to the BITS-bit range, with values above 2^BITS-1 clipped, and valid
// is high for that cycle. One conversion can start every cycle.
module adc
  import hurry_pkg::*;
#(
  parameter int unsigned BITS = ADC_BITS,
  parameter int unsigned IW   = CUR_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IW-1:0]   ain,
  output logic [BITS-1:0] code,
  output logic            valid
);
  localparam int unsigned MAXC = (1 << BITS) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= start;
      if (start) code <= (32'(ain) > MAXC) ? BITS'(MAXC) : BITS'(ain);
    end
  end
endmodule
