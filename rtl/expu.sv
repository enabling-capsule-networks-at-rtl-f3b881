// expu -- approximate natural-exponential unit, e^a = 2^(a*log2 e) ~ 2^u*(1+v).
//
// A constant multiplier scales the argument by log2(e) (LOG2E_Q8 = 369, i.e.
// 1.4414, 8 fraction bits, this design's rounding of the constant); the
// product is truncated back to the argument's fraction bits and handed to the
// power-of-two unit pow2u. Used as the EXP block of the squash-exp squashing
// unit, whose argument is the negated norm, so a <= 0.
//
// Interface: a (IN_W bits signed, IN_FRAC fraction bits) -> y (OUT_FRAC+1
// bits, value in [0,1]). Combinational.
module expu #(
  parameter int unsigned IN_W     = 9,
  parameter int unsigned IN_FRAC  = 5,
  parameter int unsigned OUT_FRAC = 8,
  parameter int unsigned LOG2E_Q8 = 369
) (
  input  logic signed [IN_W-1:0]   a,
  output logic        [OUT_FRAC:0] y
);
  localparam int unsigned PW = IN_W + 10;   // product width (constant fits 10 bits signed)
  localparam int unsigned TW = IN_W + 1;    // scaled argument: |a*log2e| < 2|a|

  logic signed [PW-1:0] prod;
  logic signed [TW-1:0] t;

  always_comb begin
    prod = PW'(a) * $signed(PW'(LOG2E_Q8));
    t    = TW'(prod >>> 8);
  end

  pow2u #(.IN_W(TW), .IN_FRAC(IN_FRAC), .OUT_FRAC(OUT_FRAC)) u_pow2 (.a(t), .y(y));
endmodule
