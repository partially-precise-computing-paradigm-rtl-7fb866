// ppc_mul8x8 -- 8x8 partially-precise multiplier (PPM).
//
// p = a * b (unsigned), exact whenever a is in MASK_A and b is in MASK_B, and
// delivered as the OUT_WL most significant bits of the 16-bit product (the
// truncated low bits are output don't-cares in the paper's terms). Following
// the paper's supplementary Fig. 2 the product is formed from four 4x4
// segments, A[3:0]xB[3:0], A[3:0]xB[7:4], A[7:4]xB[3:0] and A[7:4]xB[7:4],
// whose partial products are added directly with a precise adder. Each segment
// is a ppc_mul4x4 that knows which nibbles its operands can take, so for
// example DS_16 on both inputs leaves only the A[7:4]xB[7:4] segment with
// exact rows. With full masks the block is a conventional multiplier.
//
// Interface: combinational; OUT_WL = 16 gives the full product. With a
// smaller OUT_WL the low product bits are left unused on purpose.
module ppc_mul8x8
  import ppc_pkg::*;
#(
  parameter vmask_t      MASK_A = ALL8,
  parameter vmask_t      MASK_B = ALL8,
  parameter int unsigned OUT_WL = 16
) (
  input  logic [7:0]        a,
  input  logic [7:0]        b,
  output logic [OUT_WL-1:0] p
);
  logic [7:0]  pp_ll, pp_lh, pp_hl, pp_hh;
  logic [15:0] full;

  ppc_mul4x4 #(.VA(nib_mask(MASK_A, 0)), .VB(nib_mask(MASK_B, 0)))
    u_ll (.a(a[3:0]), .b(b[3:0]), .p(pp_ll));
  ppc_mul4x4 #(.VA(nib_mask(MASK_A, 0)), .VB(nib_mask(MASK_B, 1)))
    u_lh (.a(a[3:0]), .b(b[7:4]), .p(pp_lh));
  ppc_mul4x4 #(.VA(nib_mask(MASK_A, 1)), .VB(nib_mask(MASK_B, 0)))
    u_hl (.a(a[7:4]), .b(b[3:0]), .p(pp_hl));
  ppc_mul4x4 #(.VA(nib_mask(MASK_A, 1)), .VB(nib_mask(MASK_B, 1)))
    u_hh (.a(a[7:4]), .b(b[7:4]), .p(pp_hh));

  assign full = 16'(pp_ll) + (16'(pp_lh) << 4) + (16'(pp_hl) << 4) + (16'(pp_hh) << 8);
  assign p    = full[15 -: OUT_WL];

  initial begin
    assert (OUT_WL >= 1 && OUT_WL <= 16) else $error("ppc_mul8x8: OUT_WL out of range");
  end
endmodule
