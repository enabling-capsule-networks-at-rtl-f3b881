// sqrt_lut -- square root of the squared norm by two look-up tables.
//
// The squared norm S (unsigned, S_FRAC = 10 fraction bits) is mapped to
// ||x|| = sqrt(S) (unsigned Q3.5) by one of two 128-entry tables:
//   low table   S in [0, 4):  indexed by S in steps of 1/32 (bits 11:5)
//   high table  S in [4, 64): indexed by S in steps of 1/2  (bits 15:9)
// and saturates to the largest code (7.97) for S >= 64. Splitting the range
// keeps the step fine where sqrt is steep and coarse where it is flat. Each
// entry is sqrt of the centre of its step, rounded to the nearest code,
//     entry = round( sqrt(raw_centre) ),  raw_centre = S_centre * 2^10,
// since sqrt(S) * 2^5 = sqrt(S * 2^10). The tables are computed at elaboration
// with an integer square root. Two tables over two ranges of S follow the
// published norm unit; the range limits and resolutions are this design's.
//
// Interface: s (20 bits) -> norm (8 bits). Combinational.
module sqrt_lut
  import capsnet_nl_pkg::*;
#(
  parameter int unsigned S_W       = SQ_S_W,
  parameter int unsigned S_FRAC    = SQ_S_FRAC,
  parameter int unsigned NORM_OUT_W = NORM_W
) (
  input  logic [S_W-1:0]        s,
  output logic [NORM_OUT_W-1:0] norm
);
  localparam int unsigned ENTRIES = 128;
  localparam int unsigned NMAX    = (1 << NORM_OUT_W) - 1;

  // floor(sqrt(n)), bit by bit
  function automatic int unsigned isqrt(input int unsigned n);
    int unsigned r, b;
    r = 0;
    for (int i = 15; i >= 0; i--) begin
      b = r | (32'd1 << i);
      if (b * b <= n) r = b;
    end
    return r;
  endfunction

  // round(sqrt(raw)) clipped to the norm range
  function automatic int unsigned rsqrt_code(input int unsigned raw);
    int unsigned r;
    r = (isqrt(4 * raw) + 1) / 2;
    return (r > NMAX) ? NMAX : r;
  endfunction

  logic [NORM_OUT_W-1:0] lut_lo [ENTRIES];
  logic [NORM_OUT_W-1:0] lut_hi [ENTRIES];

  for (genvar i = 0; i < ENTRIES; i++) begin : g_lut
    // low range: step 2^(S_FRAC-5) raw units (1/32), high range: 2^(S_FRAC-1) (1/2)
    localparam int unsigned LO = rsqrt_code(i * (1 << (S_FRAC - 5)) + (1 << (S_FRAC - 6)));
    localparam int unsigned HI = rsqrt_code(i * (1 << (S_FRAC - 1)) + (1 << (S_FRAC - 2)));
    assign lut_lo[i] = NORM_OUT_W'(LO);
    assign lut_hi[i] = NORM_OUT_W'(HI);
  end

  logic in_lo, in_hi;
  always_comb begin
    in_lo = (s >> (S_FRAC + 2)) == '0;   // S < 4
    in_hi = (s >> (S_FRAC + 6)) == '0;   // S < 64
    if (in_lo)      norm = lut_lo[s[S_FRAC+1 -: 7]];
    else if (in_hi) norm = lut_hi[s[S_FRAC+5 -: 7]];
    else            norm = NORM_OUT_W'(NMAX);
  end
endmodule
