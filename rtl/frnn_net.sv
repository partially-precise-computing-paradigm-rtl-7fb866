// frnn_net -- three-layer face-recognition network (N_IN-N_HID-N_OUT) with
// partially-precise hidden-layer multipliers.
//
// The network of the paper's Fig. 9 has 960 inputs (a 32 x 30 image),
// 40 hidden and 7 output neurons; each neuron is a MAC (frnn_mac) followed by
// a sigmoid. Here all hidden neurons work in parallel on a broadcast pixel
// stream, then all output neurons work in parallel on the hidden activations:
//   S_HID  one (pixel, w_hid[0..N_HID-1]) set per in_valid cycle, idx counts
//          the pixel; the pixel passes the image preprocessing (TH, then DS)
//          and each weight a DS preprocessing before the hidden PPM-MACs.
//   S_OUT  one w_out[0..N_OUT-1] set per in_valid cycle, idx counts the hidden
//          neuron j; every output MAC adds hid_act[j] x w_out[k].
//   S_DONE out_acc holds the N_OUT results; done is high until the next start.
// The sigmoid is not built: the paper only names it, so hid_acc leaves the
// block and the activations come back on hid_act (combinationally, in the
// same cycle). Weights likewise arrive on ports; where they are stored is not
// described. The parallel schedule, the handshake (start, in_valid, idx) and
// the use of precise multipliers in the output layer are this design's
// choices; the PPC multipliers in the hidden layer follow the paper.
//
// Timing: with in_valid held high an image takes N_IN + N_HID cycles from the
// first accepted pixel to done. start clears every accumulator.
module frnn_net
  import ppc_pkg::*;
#(
  parameter int unsigned N_IN    = 960,
  parameter int unsigned N_HID   = 40,
  parameter int unsigned N_OUT   = 7,
  parameter int unsigned NAT_HI  = 159,  // largest pixel value in the data set
  parameter int unsigned TH_X    = 48,
  parameter int unsigned TH_Y    = 48,
  parameter int unsigned DS_IMG  = 32,
  parameter int unsigned DS_W    = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        in_valid,
  input  logic [7:0]  pixel,
  input  logic [7:0]  w_hid   [N_HID],
  input  logic [7:0]  w_out   [N_OUT],
  input  logic [7:0]  hid_act [N_HID],
  output logic [11:0] hid_acc [N_HID],
  output logic [11:0] out_acc [N_OUT],
  output logic        busy,
  output logic        out_phase,
  output logic [$clog2(N_IN)-1:0] idx,
  output logic        done
);
  typedef enum logic [1:0] {S_IDLE, S_HID, S_OUT, S_DONE} state_t;

  localparam vmask_t M_IMG = pre_mask(8, DS_IMG, TH_X, TH_Y, 0, NAT_HI);
  localparam vmask_t M_W   = pre_mask(8, DS_W, 0, 0, 0, 255);
  localparam vmask_t M_ALL = full_mask(8);

  state_t     state;
  logic [7:0] q_pix;
  logic [7:0] act_sel;
  logic       hid_en, out_en;

  assign busy      = (state == S_HID) || (state == S_OUT);
  assign out_phase = (state == S_OUT);
  assign done      = (state == S_DONE);
  assign hid_en    = (state == S_HID) && in_valid;
  assign out_en    = (state == S_OUT) && in_valid;
  assign act_sel   = hid_act[idx[$clog2(N_HID)-1:0]];

  ppc_preproc #(.WL(8), .DS(DS_IMG), .TH_X(TH_X), .TH_Y(TH_Y))
    u_pre_pix (.din(pixel), .dout(q_pix));

  for (genvar n = 0; n < N_HID; n++) begin : g_hid
    logic [7:0] q_w;
    ppc_preproc #(.WL(8), .DS(DS_W), .TH_X(0), .TH_Y(0)) u_pre_w (.din(w_hid[n]), .dout(q_w));
    frnn_mac #(.MASK_IMG(M_IMG), .MASK_W(M_W)) u_mac (
      .clk, .rst_n, .clr(start), .en(hid_en), .img(q_pix), .w(q_w), .acc(hid_acc[n])
    );
  end

  for (genvar k = 0; k < N_OUT; k++) begin : g_out
    frnn_mac #(.MASK_IMG(M_ALL), .MASK_W(M_ALL)) u_mac (
      .clk, .rst_n, .clr(start), .en(out_en), .img(act_sel), .w(w_out[k]), .acc(out_acc[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
    end else if (start) begin
      state <= S_HID;
      idx   <= '0;
    end else begin
      unique case (state)
        S_HID: if (in_valid) begin
          if (32'(idx) == N_IN - 1) begin state <= S_OUT; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        S_OUT: if (in_valid) begin
          if (32'(idx) == N_HID - 1) begin state <= S_DONE; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        default: ;
      endcase
    end
  end

  initial begin
    assert (N_HID <= N_IN) else $error("frnn_net: N_HID must not exceed N_IN");
  end
endmodule
