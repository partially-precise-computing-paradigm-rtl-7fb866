// ib_blender -- image blending datapath with partially-precise multipliers.
//
// Computes P = alpha P1 + (1 - alpha) P2 for one pixel pair (the paper's
// Eq. (11)) with the structure of its Fig. 7: Multiplier-A forms
// img1 x coef1, Multiplier-B forms img2 x coef2, each 16-bit product is cut to
// its 8 most significant bits, and a precise 8-bit adder sums the two.
// coef1 carries alpha in 0..127 and coef2 carries 1 - alpha in 128..255
// (8-bit codes, value / 256); that the blending ratio is limited this way is
// the paper's, and it is the natural sparsity the two PPMs exploit (coef1 never
// has its MSB set, coef2 always has it). Both images and both coefficients
// also pass a DS_DS preprocessing; the two PPMs are exact for every value
// that can then occur (ppc_mul8x8). NATURAL = 0 drops the natural range and
// DS = 1 drops the intentional sparsity; both together give the conventional
// hardware. The default (natural + DS_16) is the configuration the paper
// reports as the cheapest that keeps excellent (30 dB) output quality.
// Driving coef2 = 255 - coef1 keeps both coefficients in range; the adder
// cannot overflow then, because the two truncated products sum to at most
// (img1 coef1 + img2 coef2) / 256 < 256.
//
// Interface: combinational; inputs outside the natural ranges give
// don't-care results, as for any PPC block.
module ib_blender
  import ppc_pkg::*;
#(
  parameter int unsigned DS      = 16,
  parameter bit          NATURAL = 1'b1
) (
  input  logic [7:0] img1,
  input  logic [7:0] coef1,
  input  logic [7:0] img2,
  input  logic [7:0] coef2,
  output logic [7:0] pix
);
  localparam vmask_t M_IMG = pre_mask(8, DS, 0, 0, 0, 255);
  localparam vmask_t M_C1  = pre_mask(8, DS, 0, 0, 0,   NATURAL ? 127 : 255);
  localparam vmask_t M_C2  = pre_mask(8, DS, 0, 0, NATURAL ? 128 : 0, 255);

  logic [7:0] qi1, qc1, qi2, qc2, ma, mb;

  ppc_preproc #(.WL(8), .DS(DS), .TH_X(0), .TH_Y(0)) u_pre_i1 (.din(img1),  .dout(qi1));
  ppc_preproc #(.WL(8), .DS(DS), .TH_X(0), .TH_Y(0)) u_pre_c1 (.din(coef1), .dout(qc1));
  ppc_preproc #(.WL(8), .DS(DS), .TH_X(0), .TH_Y(0)) u_pre_i2 (.din(img2),  .dout(qi2));
  ppc_preproc #(.WL(8), .DS(DS), .TH_X(0), .TH_Y(0)) u_pre_c2 (.din(coef2), .dout(qc2));

  ppc_mul8x8 #(.MASK_A(M_IMG), .MASK_B(M_C1), .OUT_WL(8))
    u_mul_a (.a(qi1), .b(qc1), .p(ma));
  ppc_mul8x8 #(.MASK_A(M_IMG), .MASK_B(M_C2), .OUT_WL(8))
    u_mul_b (.a(qi2), .b(qc2), .p(mb));

  assign pix = ma + mb;
endmodule
