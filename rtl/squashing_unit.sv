// squashing_unit -- piecewise squashing coefficient and output multiplier.
//
// Squash scales each input component by c(n) = n / (1 + n^2), n = ||x||.
// Below the breakpoint the coefficient is approximated by a smooth function
// built from the exponential hardware, above it by a direct-mapping table:
//   VARIANT = SQUASH_EXP :  c ~ 1 - e^-n   for n < 0.75, table otherwise
//   VARIANT = SQUASH_POW2:  c ~ 1 - 2^-n   for n < 1.0,  table otherwise
// The first branch is: two's complement of the norm (CA2), the exponential
// unit expu (exp variant) or pow2u (pow2 variant), and a subtraction from 1.
// A mux driven by comparing the norm with the breakpoint picks the branch; a
// multiplier forms y_i = c * x_i. The breakpoints are read off the published
// error plots (0.75 is this design's reading of a line drawn between the
// 0.6 and 0.8 grid marks; 1.0 sits on a grid mark).
//
// Formats: norm Q3.5, coef Q0.8, x Q3.5 signed, y Q1.7 signed; the product
// is truncated (arithmetic shift) and saturated to 8 bits. Combinational.
module squashing_unit
  import capsnet_nl_pkg::*;
#(
  parameter squash_variant_e VARIANT = SQUASH_EXP
) (
  input  logic [NORM_W-1:0]   norm,
  input  logic [SQ_IN_W-1:0]  x,
  output logic [COEF_W-1:0]   coef,
  output logic [SQ_OUT_W-1:0] y
);
  localparam int unsigned THR   = (VARIANT == SQUASH_EXP) ? THR_EXP : THR_POW2;
  localparam int unsigned SHIFT = SQ_IN_FRAC + COEF_W - SQ_OUT_FRAC;
  localparam int unsigned PW    = SQ_IN_W + COEF_W + 1;

  logic signed [NORM_W:0]   neg_norm;   // CA2(norm), Q.5
  logic        [COEF_W:0]   e_val;      // e^-n or 2^-n, Q1.8
  logic        [COEF_W:0]   one_minus;  // 1 - e_val
  logic        [COEF_W-1:0] coef_fn, coef_lut;
  logic signed [PW-1:0]     prod, scaled;

  assign neg_norm = -$signed({1'b0, norm});

  if (VARIANT == SQUASH_EXP) begin : g_exp
    expu  #(.IN_W(NORM_W+1), .IN_FRAC(NORM_FRAC), .OUT_FRAC(COEF_W)) u_exp  (.a(neg_norm), .y(e_val));
  end else begin : g_pow2
    pow2u #(.IN_W(NORM_W+1), .IN_FRAC(NORM_FRAC), .OUT_FRAC(COEF_W)) u_pow2 (.a(neg_norm), .y(e_val));
  end

  squash_coeff_lut #(.THR(THR)) u_lut (.norm(norm), .coef(coef_lut));

  always_comb begin
    one_minus = (COEF_W+1)'(1 << COEF_W) - e_val;
    coef_fn   = one_minus[COEF_W] ? '1 : one_minus[COEF_W-1:0];
    coef      = (norm < NORM_W'(THR)) ? coef_fn : coef_lut;
    prod      = PW'($signed(x)) * $signed({1'b0, coef});
    scaled    = prod >>> SHIFT;
    if (scaled > PW'(2**(SQ_OUT_W-1) - 1))       y = {1'b0, {(SQ_OUT_W-1){1'b1}}};
    else if (scaled < -PW'(2**(SQ_OUT_W-1)))     y = {1'b1, {(SQ_OUT_W-1){1'b0}}};
    else                                         y = scaled[SQ_OUT_W-1:0];
  end
endmodule
