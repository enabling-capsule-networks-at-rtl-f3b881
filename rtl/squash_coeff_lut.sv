// squash_coeff_lut -- direct mapping of the squashing coefficient.
//
// For norms at or above the breakpoint THR (a Q3.5 norm code) the squashing
// coefficient n / (1 + n^2) is read from a table with one entry per norm code
// THR..255. With n = i/32 each entry is
//     coef(i) = round( 256 * 32 i / (1024 + i^2) )      (Q0.8)
// computed at elaboration. Codes below THR return 0; the squashing unit uses
// its exponential branch there. Table resolution (one entry per norm code) is
// this design's choice.
//
// Interface: norm (8 bits) -> coef (8 bits). Combinational.
module squash_coeff_lut
  import capsnet_nl_pkg::*;
#(
  parameter int unsigned THR = THR_EXP
) (
  input  logic [NORM_W-1:0] norm,
  output logic [COEF_W-1:0] coef
);
  localparam int unsigned NCODES = 1 << NORM_W;
  localparam int unsigned ENTRIES = NCODES - THR;

  function automatic int unsigned coef_code(input int unsigned i);
    int unsigned den;
    den = 1024 + i * i;
    return (2 * 8192 * i + den) / (2 * den);
  endfunction

  logic [COEF_W-1:0] lut [ENTRIES];
  for (genvar i = 0; i < ENTRIES; i++) begin : g_lut
    localparam int unsigned C = coef_code(i + THR);
    assign lut[i] = COEF_W'(C);
  end

  always_comb begin
    if (norm >= NORM_W'(THR)) coef = lut[norm - NORM_W'(THR)];
    else                      coef = '0;
  end
endmodule
