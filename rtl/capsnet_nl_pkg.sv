// Shared types and word formats of the approximate softmax and squash units.
//
// All data are two's-complement or unsigned fixed-point words. The formats are
// this design's choice (the units were evaluated on quantized networks, but no
// bit widths are published): softmax inputs Q4.4, softmax exponentials and
// outputs 8 fraction bits; squash inputs Q3.5 (signed, range [-4,4)), norm Q3.5
// unsigned, squashing coefficient Q0.8, squash outputs Q1.7 signed.
// The supported vector lengths (10/32/128 for softmax, 4/8/16/32 for squash)
// follow the two capsule networks the units were built for.
package capsnet_nl_pkg;

  // ---------------- softmax-b2 ----------------
  localparam int unsigned SM_IN_W   = 8;   // input word
  localparam int unsigned SM_IN_FRAC = 4;  // input fraction bits
  localparam int unsigned SM_E_FRAC = 8;   // fraction bits of 2^(x-max) terms and outputs
  localparam int unsigned SM_SUM_W  = 16;  // exponential-sum register (holds 128.0)
  localparam int unsigned SM_MAX_N  = 128;

  typedef enum logic [1:0] {
    SM_N10  = 2'd0,
    SM_N32  = 2'd1,
    SM_N128 = 2'd2
  } sm_size_e;

  // ---------------- squash ----------------
  localparam int unsigned SQ_IN_W    = 8;
  localparam int unsigned SQ_IN_FRAC = 5;
  localparam int unsigned SQ_S_W     = 20; // squared-norm accumulator
  localparam int unsigned SQ_S_FRAC  = 10;
  localparam int unsigned NORM_W     = 8;
  localparam int unsigned NORM_FRAC  = 5;
  localparam int unsigned COEF_W     = 8;  // coefficient is < 1, all bits fraction
  localparam int unsigned SQ_OUT_W   = 8;
  localparam int unsigned SQ_OUT_FRAC = 7;
  localparam int unsigned SQ_MAX_N   = 32;

  typedef enum logic [1:0] {
    SQ_N4  = 2'd0,
    SQ_N8  = 2'd1,
    SQ_N16 = 2'd2,
    SQ_N32 = 2'd3
  } sq_size_e;

  typedef enum logic {
    SQUASH_EXP  = 1'b0,  // first range: 1 - e^-||x||
    SQUASH_POW2 = 1'b1   // first range: 1 - 2^-||x||
  } squash_variant_e;

  // Breakpoints between the function range and the LUT range, as norm codes (Q3.5).
  localparam int unsigned THR_EXP  = 24;  // 0.75
  localparam int unsigned THR_POW2 = 32;  // 1.00

  // Pass of a two/three-pass streaming unit.
  typedef enum logic [1:0] {
    PASS_IDLE = 2'd0,
    PASS_MAX  = 2'd1,  // softmax only: find the maximum
    PASS_ACC  = 2'd2,  // accumulate (exponential sum / squared norm)
    PASS_OUT  = 2'd3   // produce outputs
  } pass_e;

  function automatic int unsigned sm_len(sm_size_e s);
    case (s)
      SM_N10:  return 10;
      SM_N32:  return 32;
      default: return 128;
    endcase
  endfunction

  function automatic int unsigned sq_len(sq_size_e s);
    case (s)
      SQ_N4:   return 4;
      SQ_N8:   return 8;
      SQ_N16:  return 16;
      default: return 32;
    endcase
  endfunction

endpackage
