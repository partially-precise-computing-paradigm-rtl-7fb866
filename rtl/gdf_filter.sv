// gdf_filter -- 3x3 Gaussian denoising filter built from partially-precise adders.
//
// The filter computes the weighted window sum
//     out = P1 + 2 P2 + P3 + 2 P4 + 4 P5 + 2 P6 + P7 + 2 P8 + P9
// (kernel 1 2 1 / 2 4 2 / 1 2 1; dividing by 16 means keeping out[11:4]).
// The structure is the paper's (its Fig. 5): the weights become shifts
// (P2, P4, P6, P8 << 1 to 9 bits, P5 << 2 to 10 bits) and eight adders form
//     Adder-1 = P1 + P3 (9b)      Adder-2 = P7 + P9 (9b)
//     Adder-3 = 2P2 + 2P4 (10b)   Adder-4 = 2P6 + 2P8 (10b)
//     Adder-5 = A1 + A2 (10b)     Adder-6 = A3 + A4 (11b)
//     Adder-7 = A5 + A6 (12b)     Adder-8 = A7 + 4P5 (12b)
// Every pixel first passes a DS_DS down-sampling (ppc_preproc). Each adder is a
// ppc_adder whose don't-cares come from the value sets that can reach it:
// the sets are propagated through the shifts and adders at elaboration
// (ppc_pkg), so the algorithmic sparsity the paper points out (DS_2-like
// after a 1-bit shift, DS_4-like at Adder-8's right input, the natural-like
// range at Adder-7's output) is used along with the intentional DS.
// DS = 16 is the largest setting the paper reports as still of excellent
// quality (31 dB); DS = 1 gives the conventional filter.
//
// Interface: p[0..8] = P1..P9 in row-major order; out is the 12-bit sum.
// Purely combinational; registering the window and the result is left to the
// surrounding line-buffer logic, which the paper does not describe.
module gdf_filter
  import ppc_pkg::*;
#(
  parameter int unsigned DS = 16
) (
  input  logic [7:0]  p   [9],
  output logic [11:0] out
);
  // Value sets at every adder input (range analysis).
  localparam vmask_t M_P   = pre_mask(8, DS, 0, 0, 0, 255);
  localparam vmask_t M_P2  = shl_mask(M_P, 1);
  localparam vmask_t M_P4  = shl_mask(M_P, 2);
  localparam vmask_t M_A1  = sum_mask(M_P,  M_P,  9);
  localparam vmask_t M_A3  = sum_mask(M_P2, M_P2, 10);
  localparam vmask_t M_A5  = sum_mask(M_A1, M_A1, 10);
  localparam vmask_t M_A6  = sum_mask(M_A3, M_A3, 11);
  localparam vmask_t M_A7  = sum_mask(M_A5, M_A6, 12);

  logic [7:0]  q [9];
  logic [8:0]  a1, a2;
  logic [9:0]  a3, a4, a5;
  logic [10:0] a6;
  logic [11:0] a7;

  for (genvar i = 0; i < 9; i++) begin : g_pre
    ppc_preproc #(.WL(8), .DS(DS), .TH_X(0), .TH_Y(0)) u_pre (.din(p[i]), .dout(q[i]));
  end

  ppc_adder #(.WA(8),  .WB(8),  .WO(9),  .MASK_A(M_P),  .MASK_B(M_P))
    u_add1 (.a(q[0]), .b(q[2]), .sum(a1));
  ppc_adder #(.WA(8),  .WB(8),  .WO(9),  .MASK_A(M_P),  .MASK_B(M_P))
    u_add2 (.a(q[6]), .b(q[8]), .sum(a2));
  ppc_adder #(.WA(9),  .WB(9),  .WO(10), .MASK_A(M_P2), .MASK_B(M_P2))
    u_add3 (.a({q[1], 1'b0}), .b({q[3], 1'b0}), .sum(a3));
  ppc_adder #(.WA(9),  .WB(9),  .WO(10), .MASK_A(M_P2), .MASK_B(M_P2))
    u_add4 (.a({q[5], 1'b0}), .b({q[7], 1'b0}), .sum(a4));
  ppc_adder #(.WA(9),  .WB(9),  .WO(10), .MASK_A(M_A1), .MASK_B(M_A1))
    u_add5 (.a(a1), .b(a2), .sum(a5));
  ppc_adder #(.WA(10), .WB(10), .WO(11), .MASK_A(M_A3), .MASK_B(M_A3))
    u_add6 (.a(a3), .b(a4), .sum(a6));
  ppc_adder #(.WA(10), .WB(11), .WO(12), .MASK_A(M_A5), .MASK_B(M_A6))
    u_add7 (.a(a5), .b(a6), .sum(a7));
  ppc_adder #(.WA(12), .WB(10), .WO(12), .MASK_A(M_A7), .MASK_B(M_P4))
    u_add8 (.a(a7), .b({q[4], 2'b00}), .sum(out));
endmodule
