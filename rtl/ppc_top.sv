// ppc_top -- the three partially-precise application datapaths side by side.
//
// The paper demonstrates its partially-precise computing (PPC) blocks in three
// independent applications, each shown here in the configuration the paper
// singles out:
//   gdf_filter  3x3 Gaussian denoising filter, eight PPAs, DS_16 on all pixels;
//   ib_blender  image blending, two PPMs, natural sparsity + DS_16;
//   frnn_net    960-40-7 face-recognition network, PPM hidden neurons,
//               natural sparsity + TH_48^48 + DS_32.
// They share nothing but the clock and reset (only the network is
// sequential); this wrapper exists to build and simulate them together.
// The network's sigmoid is not built, so its hidden accumulators leave on
// hid_acc and the activations return on hid_act.
module ppc_top (
  input  logic        clk,
  input  logic        rst_n,
  // Gaussian filter
  input  logic [7:0]  gdf_win [9],
  output logic [11:0] gdf_out,
  // image blending
  input  logic [7:0]  ib_img1,
  input  logic [7:0]  ib_coef1,
  input  logic [7:0]  ib_img2,
  input  logic [7:0]  ib_coef2,
  output logic [7:0]  ib_pix,
  // face-recognition network
  input  logic        nn_start,
  input  logic        nn_in_valid,
  input  logic [7:0]  nn_pixel,
  input  logic [7:0]  nn_w_hid   [40],
  input  logic [7:0]  nn_w_out   [7],
  input  logic [7:0]  nn_hid_act [40],
  output logic [11:0] nn_hid_acc [40],
  output logic [11:0] nn_out_acc [7],
  output logic        nn_busy,
  output logic        nn_out_phase,
  output logic [9:0]  nn_idx,
  output logic        nn_done
);
  gdf_filter u_gdf (.p(gdf_win), .out(gdf_out));

  ib_blender u_ib (
    .img1(ib_img1), .coef1(ib_coef1), .img2(ib_img2), .coef2(ib_coef2), .pix(ib_pix)
  );

  frnn_net u_nn (
    .clk, .rst_n,
    .start    (nn_start),
    .in_valid (nn_in_valid),
    .pixel    (nn_pixel),
    .w_hid    (nn_w_hid),
    .w_out    (nn_w_out),
    .hid_act  (nn_hid_act),
    .hid_acc  (nn_hid_acc),
    .out_acc  (nn_out_acc),
    .busy     (nn_busy),
    .out_phase(nn_out_phase),
    .idx      (nn_idx),
    .done     (nn_done)
  );
endmodule
