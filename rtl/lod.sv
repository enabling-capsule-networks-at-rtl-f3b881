// lod -- leading-one detector.
//
// Returns the bit position of the most significant 1 of d and a flag that d
// is zero (pos is then 0). Priority encoder written as a loop from the LSB up,
// so the last (highest) 1 found wins. Combinational.
module lod #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0]         d,
  output logic [$clog2(W)-1:0] pos,
  output logic                 zero
);
  always_comb begin
    pos  = '0;
    zero = (d == '0);
    for (int unsigned i = 0; i < W; i++)
      if (d[i]) pos = ($clog2(W))'(i);
  end
endmodule
