// capsnet_nl_top -- the two approximate nonlinear units of a capsule-network
// accelerator, side by side.
//
// softmax_b2 turns routing logits into coupling coefficients (dynamic routing,
// 10, 32 or 128 logits per capsule); squash turns a capsule's weighted sum
// into its activity vector (4 to 32 components). The two units share only
// the clock and reset and have independent streaming ports (prefix sm_ and
// sq_); see each unit's header for its protocol and timing. SQUASH_VARIANT
// chooses the squash-exp (default) or squash-pow2 approximation. Placing the
// units in one top with separate streams is this design's choice.
module capsnet_nl_top
  import capsnet_nl_pkg::*;
#(
  parameter squash_variant_e SQUASH_VARIANT = SQUASH_EXP
) (
  input  logic                clk,
  input  logic                rst_n,
  // softmax stream
  input  logic                sm_start,
  input  sm_size_e            sm_size,
  input  logic                sm_in_valid,
  input  logic [SM_IN_W-1:0]  sm_x,
  output logic                sm_in_ready,
  output pass_e               sm_pass,
  output logic                sm_out_valid,
  output logic [SM_E_FRAC:0]  sm_y,
  output logic                sm_done,
  // squash stream
  input  logic                sq_start,
  input  sq_size_e            sq_size,
  input  logic                sq_in_valid,
  input  logic [SQ_IN_W-1:0]  sq_x,
  output logic                sq_in_ready,
  output pass_e               sq_pass,
  output logic                sq_out_valid,
  output logic [SQ_OUT_W-1:0] sq_y,
  output logic [NORM_W-1:0]   sq_norm,
  output logic                sq_done
);
  softmax_b2 u_softmax (
    .clk, .rst_n,
    .start(sm_start), .size(sm_size), .in_valid(sm_in_valid), .x(sm_x),
    .in_ready(sm_in_ready), .pass(sm_pass), .out_valid(sm_out_valid),
    .y(sm_y), .done(sm_done)
  );

  squash #(.VARIANT(SQUASH_VARIANT)) u_squash (
    .clk, .rst_n,
    .start(sq_start), .size(sq_size), .in_valid(sq_in_valid), .x(sq_x),
    .in_ready(sq_in_ready), .pass(sq_pass), .out_valid(sq_out_valid),
    .y(sq_y), .norm(sq_norm), .done(sq_done)
  );
endmodule
