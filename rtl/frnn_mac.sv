// frnn_mac -- multiply-accumulate neuron core of the face-recognition network.
//
// Following the paper's Fig. 10, an 8x8 multiplier forms image x weight and
// keeps 12 bits of the product, and a 12-bit adder adds it to the value held
// in a feedback register:   acc <= acc + (img * w)[15:4]   (modulo 2^12).
// The multiplier is a partially-precise one (ppc_mul8x8) that is exact for
// image values in MASK_IMG and weights in MASK_W; the adder is precise, as in
// all of the paper's FRNN versions. Which 12 product bits are kept (the upper
// twelve) and the wrap-around of the accumulator are this design's reading of
// the printed word lengths and histograms, not stated in the text.
// The defaults are the paper's last FRNN configuration: images restricted to
// their natural range 0..159, then TH_48^48 and DS_32; weights DS_32.
//
// Interface / timing: synchronous to clk, asynchronous active-low reset.
// clr empties the accumulator on the next edge (and has priority); with en
// high the product of the current img and w is added on the next edge.
// Inputs are expected already preprocessed; other values give don't-care
// products.
module frnn_mac
  import ppc_pkg::*;
#(
  parameter vmask_t MASK_IMG = pre_mask(8, 32, 48, 48, 0, 159),
  parameter vmask_t MASK_W   = pre_mask(8, 32, 0, 0, 0, 255)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        en,
  input  logic [7:0]  img,
  input  logic [7:0]  w,
  output logic [11:0] acc
);
  logic [11:0] prod;

  ppc_mul8x8 #(.MASK_A(MASK_IMG), .MASK_B(MASK_W), .OUT_WL(12))
    u_mul (.a(img), .b(w), .p(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + prod;
  end
endmodule
