// squash_norm_unit -- Euclidean norm of a streamed vector.
//
// Each accepted component x_i (signed Q3.5) is squared by a multiplier and
// added into the square register (unsigned, 10 fraction bits, 20 bits wide,
// enough for 32 components of full scale). The square root of the register is
// read through the two-range Sqrt-LUT (sqrt_lut). This is the norm unit of
// the squash-exp and squash-pow2 designs; the widths are this design's.
//
// Interface: `clear` zeroes the register (has priority), `acc_en` adds x^2 on
// the rising clock edge. `s` is the register, `norm` = sqrt_lut(s) is
// combinational from it, valid the cycle after the last accumulation.
module squash_norm_unit
  import capsnet_nl_pkg::*;
#(
  parameter int unsigned IN_W = SQ_IN_W,
  parameter int unsigned S_W  = SQ_S_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  acc_en,
  input  logic [IN_W-1:0]       x,
  output logic [S_W-1:0]        s,
  output logic [NORM_W-1:0]     norm
);
  logic signed [2*IN_W-1:0] sq;

  assign sq = $signed(x) * $signed(x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      s <= '0;
    else if (clear)  s <= '0;
    else if (acc_en) s <= s + S_W'($unsigned(sq));
  end

  sqrt_lut #(.S_W(S_W)) u_sqrt (.s(s), .norm(norm));
endmodule
