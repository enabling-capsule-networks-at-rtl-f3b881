// log2u -- approximate base-2 logarithm unit, log2 F ~ w + (k - 1).
//
// F (unsigned, IN_FRAC fraction bits) is written as 2^w * k with k in [1,2).
// A leading-one detector finds the position p of the top 1, so w = p - IN_FRAC;
// a shifter brings that 1 to the units position, which gives k; log2 k is
// replaced by the linear fit k - 1, i.e. the fraction bits of k. The result is
// the bus arrangement {w, frac(k)}: no adder is needed. This is the logarithm
// unit of softmax-b2, i.e. the natural-log unit with its ln 2 multiplier removed.
//
// Following the block diagram the mantissa is obtained by a right shift by w;
// for F < 1 (w < 0) this design shifts left instead (softmax never needs it,
// because its exponential sum is at least 1). The fraction of k is truncated
// to OUT_FRAC bits. F = 0 raises `zero` and returns the most negative value.
//
// Interface: f (IN_W bits) -> y (OUT_W bits, signed, OUT_FRAC fraction bits).
// Combinational. Requires OUT_FRAC <= IN_FRAC.
module log2u #(
  parameter int unsigned IN_W     = 16,
  parameter int unsigned IN_FRAC  = 8,
  parameter int unsigned OUT_W    = 9,
  parameter int unsigned OUT_FRAC = 4
) (
  input  logic        [IN_W-1:0]  f,
  output logic signed [OUT_W-1:0] y,
  output logic                    zero
);
  localparam int unsigned PW = $clog2(IN_W);

  logic [PW-1:0]          p;
  logic [IN_W-1:0]        k;        // k in [1,2) with IN_FRAC fraction bits
  logic signed [OUT_W-1:0] w;
  logic [OUT_FRAC-1:0]    kfrac;

  lod #(.W(IN_W)) u_lod (.d(f), .pos(p), .zero(zero));

  always_comb begin
    w = OUT_W'($signed({1'b0, p}) - $signed(IN_FRAC));
    if (p >= PW'(IN_FRAC)) k = f >> (p - PW'(IN_FRAC));
    else                   k = f << (PW'(IN_FRAC) - p);
    kfrac = k[IN_FRAC-1 -: OUT_FRAC];
    if (zero) y = {1'b1, {(OUT_W-1){1'b0}}};
    else      y = (w <<< OUT_FRAC) | OUT_W'(kfrac);
  end
endmodule
