// ppc_mul4x4 -- 4x4 partially-precise multiplier (PPM) segment.
//
// p = a * b (unsigned, 8-bit product), exact for every row whose operands are
// allowed by the masks (VA[a] and VB[b]); all other rows are don't-cares,
// written as 'x so that synthesis may choose them. With full masks this is a
// precise 4x4 multiplier. The paper composes its 8x8 PPMs from four such
// segments (its supplementary Fig. 2); the 'x encoding of the DCs and the
// masks as parameters are this design's choices.
//
// Interface: purely combinational.
module ppc_mul4x4 #(
  parameter logic [15:0] VA = 16'hFFFF,
  parameter logic [15:0] VB = 16'hFFFF
) (
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p
);
  always_comb begin
    if (VA[a] && VB[b]) p = 8'(a) * 8'(b);
    else                p = 'x;
  end
endmodule
