// ppc_adder -- partially-precise adder (PPA) of WO output bits.
//
// sum = a + b, truncated to WO bits, exact whenever a is in MASK_A and b is in
// MASK_B (the value sets that can reach this adder in its application; see
// ppc_pkg). The adder is a ripple of ceil(WO/4) ppc_add4 segments, as in the
// paper's 12-bit example (supplementary Fig. 3: A[3:0]+B[3:0], A[7:4]+B[7:4],
// A[11:8]+B[11:8] with carries C[4], C[8]). Each segment receives the nibble
// values its operands can take and the carries that can enter it, and treats
// every other row as a don't-care. With full masks it is a precise adder.
// The segment width of 4 follows the paper; how the segment DCs are derived
// from the operand sets is this design's choice (ppc_pkg).
//
// Interface: a (WA bits), b (WB bits), sum (WO bits); combinational.
// The carry out of the last segment and any segment bits above WO are not
// used: the sum is defined modulo 2^WO, so a lint tool reports them unused.
module ppc_adder
  import ppc_pkg::*;
#(
  parameter int unsigned WA = 8,
  parameter int unsigned WB = 8,
  parameter int unsigned WO = 9,
  parameter vmask_t MASK_A = full_mask(WA),
  parameter vmask_t MASK_B = full_mask(WB)
) (
  input  logic [WA-1:0] a,
  input  logic [WB-1:0] b,
  output logic [WO-1:0] sum
);
  localparam int unsigned NS = (WO + 3) / 4;
  localparam int unsigned W4 = 4 * NS;

  logic [W4-1:0] ax, bx, sx;
  logic [NS:0]   c;

  assign ax   = W4'(a);
  assign bx   = W4'(b);
  assign c[0] = 1'b0;

  for (genvar g = 0; g < NS; g++) begin : g_seg
    ppc_add4 #(
      .VA(nib_mask(MASK_A, g)),
      .VB(nib_mask(MASK_B, g)),
      .VC(carry_mask(MASK_A, MASK_B, g))
    ) u_seg (
      .a   (ax[4*g +: 4]),
      .b   (bx[4*g +: 4]),
      .cin (c[g]),
      .s   (sx[4*g +: 4]),
      .cout(c[g+1])
    );
  end

  assign sum = sx[WO-1:0];

  initial begin
    assert (WA <= 12 && WB <= 12 && WO <= 12) else $error("ppc_adder: words are limited to 12 bits");
  end
endmodule
