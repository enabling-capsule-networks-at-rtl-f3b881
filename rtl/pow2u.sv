// pow2u -- approximate power-of-two unit, 2^a ~ 2^u * (1 + v).
//
// The signed fixed-point argument a (IN_FRAC fraction bits) is split into its
// integer part u = floor(a) and fraction v in [0,1). 2^v is replaced by the
// linear fit 1 + v, which costs nothing in hardware: the word {1, v} is the
// mantissa. A barrel shifter then scales the mantissa by 2^u. This is the
// exponential unit of the softmax-b2 and squash-pow2 datapaths, i.e. the
// natural-exponential unit with its log2(e) multiplier removed.
//
// The callers only pass arguments a <= 0 (x - max, x - max - log2 sum, -||x||),
// so u <= 0 and the shift is a right shift by -u; results smaller than one LSB
// flush to zero. A positive argument saturates to 1.0 -- this saturation and
// the truncating shift are choices of this design.
//
// Interface: a (IN_W bits, signed) -> y (OUT_FRAC+1 bits, unsigned, value in
// [0,1] with OUT_FRAC fraction bits). Purely combinational.
module pow2u #(
  parameter int unsigned IN_W     = 10,
  parameter int unsigned IN_FRAC  = 4,
  parameter int unsigned OUT_FRAC = 8
) (
  input  logic signed [IN_W-1:0]   a,
  output logic        [OUT_FRAC:0] y
);
  localparam int unsigned MW = IN_FRAC + OUT_FRAC + 1;  // mantissa after alignment
  localparam int unsigned SW = IN_W - IN_FRAC + 1;      // shift-amount width

  logic signed [IN_W-IN_FRAC-1:0] u;      // integer part, floor(a)
  logic        [IN_FRAC-1:0]      v;      // fraction part
  logic        [MW-1:0]           mant;   // (1+v) * 2^(IN_FRAC+OUT_FRAC)
  logic        [SW-1:0]           sh;     // -u
  logic        [MW-1:0]           shifted;

  always_comb begin
    u    = a[IN_W-1:IN_FRAC];
    v    = a[IN_FRAC-1:0];
    mant = {1'b1, v, {OUT_FRAC{1'b0}}};
    sh   = SW'(-$signed({u[IN_W-IN_FRAC-1], u}));
    shifted = mant >> (SW'(IN_FRAC) + sh);
    if (!a[IN_W-1] && a != '0)
      y = {1'b1, {OUT_FRAC{1'b0}}};          // a > 0: saturate to 1.0
    else if (sh > SW'(OUT_FRAC))
      y = '0;                                // below one LSB
    else
      y = shifted[OUT_FRAC:0];
  end
endmodule
