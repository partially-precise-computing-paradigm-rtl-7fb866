// tb_ppc_top -- end-to-end test of all three datapaths at their default
// (paper) sizes: a full 960-pixel image through the 960-40-7 network, and
// random windows and pixel pairs through the Gaussian filter and the image
// blender. All expected values are computed here from the arithmetic
// definitions. The stand-in activation returned on nn_hid_act is
// nn_hid_acc[11:4]. Each mechanism is counted and must occur: down-sampling
// changing a filter pixel, a blender input and a network pixel, thresholding
// of a network pixel, an in_valid stall, the hidden-to-output phase switch,
// and a wrap of a hidden accumulator.
module tb_ppc_top;
  localparam int NI = 960, NH = 40, NO = 7;
  int checks = 0, failures = 0;
  int n_gdf_ds = 0, n_ib_ds = 0, n_nn_ds = 0, n_nn_th = 0, n_stall = 0, n_phase = 0, n_wrap = 0;

  logic        clk = 0, rst_n = 0;
  logic [7:0]  gdf_win [9];
  logic [11:0] gdf_out;
  logic [7:0]  ib_img1, ib_coef1, ib_img2, ib_coef2, ib_pix;
  logic        nn_start = 0, nn_in_valid = 0;
  logic [7:0]  nn_pixel;
  logic [7:0]  nn_w_hid [NH];
  logic [7:0]  nn_w_out [NO];
  logic [7:0]  nn_hid_act [NH];
  logic [11:0] nn_hid_acc [NH];
  logic [11:0] nn_out_acc [NO];
  logic        nn_busy, nn_out_phase, nn_done;
  logic [9:0]  nn_idx;

  ppc_top u_top (.*);

  always #5 clk = ~clk;
  always_comb foreach (nn_hid_act[j]) nn_hid_act[j] = nn_hid_acc[j][11:4];

  int img [NI];
  int wh [NH][NI];
  int wo [NO][NH];
  int eh [NH];
  int eo [NO];

  function automatic int pp(int v, int ds, int tx, int ty);
    int t;
    t = (v < tx) ? ty : v;
    return t - (t % ds);
  endfunction

  localparam int KW [9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Gaussian filter and image blending (combinational).
  task automatic run_pixels();
    int e, a;
    for (int n = 0; n < 2000; n++) begin
      e = 0;
      foreach (gdf_win[i]) begin
        gdf_win[i] = 8'($urandom);
        if (gdf_win[i][3:0] != 0) n_gdf_ds++;
        e += KW[i] * pp(gdf_win[i], 16, 0, 0);
      end
      ib_img1 = 8'($urandom); ib_img2 = 8'($urandom);
      ib_coef1 = 8'($urandom % 128); ib_coef2 = 8'd255 - ib_coef1;
      if (ib_coef1[3:0] != 0) n_ib_ds++;
      a = ((pp(ib_img1, 16, 0, 0) * pp(ib_coef1, 16, 0, 0)) >> 8)
        + ((pp(ib_img2, 16, 0, 0) * pp(ib_coef2, 16, 0, 0)) >> 8);
      #1;
      checks += 2;
      if (int'(gdf_out) != e) begin failures++; $display("FAIL gdf got %0d exp %0d", gdf_out, e); end
      if (int'(ib_pix) != a)  begin failures++; $display("FAIL ib got %0d exp %0d", ib_pix, a); end
    end
  endtask

  initial begin
    int cyc, s;
    nn_pixel = 0; foreach (nn_w_hid[n]) nn_w_hid[n] = 0; foreach (nn_w_out[k]) nn_w_out[k] = 0;
    run_pixels();
    repeat (2) @(posedge clk);
    rst_n = 1;

    foreach (img[i]) img[i] = $urandom % 160;
    foreach (wh[n, i]) wh[n][i] = $urandom % 256;
    foreach (wo[k, j]) wo[k][j] = $urandom % 256;
    foreach (img[i]) begin
      if (img[i] < 48) n_nn_th++;
      else if (img[i] % 32 != 0) n_nn_ds++;
    end
    foreach (eh[n]) begin
      s = 0;
      for (int i = 0; i < NI; i++) begin
        s += (pp(img[i], 32, 48, 48) * pp(wh[n][i], 32, 0, 0)) >> 4;
        if (s > 4095) begin n_wrap++; s -= 4096; end
      end
      eh[n] = s;
    end
    foreach (eo[k]) begin
      eo[k] = 0;
      for (int j = 0; j < NH; j++)
        eo[k] = (eo[k] + ((((eh[j] >> 4) & 255) * wo[k][j]) >> 4)) % 4096;
    end

    @(negedge clk); nn_start = 1;
    @(negedge clk); nn_start = 0;
    cyc = 0;
    for (int i = 0; i < NI + NH; i++) begin
      while (($urandom % 8) == 0) begin
        nn_in_valid = 0; n_stall++;
        @(negedge clk); cyc++;
      end
      checks++;
      if (int'(nn_idx) != ((i < NI) ? i : i - NI) || !nn_busy) begin
        failures++; $display("FAIL step %0d idx=%0d", i, nn_idx);
      end
      nn_in_valid = 1;
      if (i < NI) begin
        nn_pixel = 8'(img[i]);
        foreach (nn_w_hid[n]) nn_w_hid[n] = 8'(wh[n][i]);
      end else begin
        foreach (nn_w_out[k]) nn_w_out[k] = 8'(wo[k][i - NI]);
      end
      @(negedge clk); cyc++;
      if (i == NI - 1 && nn_out_phase) n_phase++;
    end
    nn_in_valid = 0;
    checks += 2;
    if (!nn_done) begin failures++; $display("FAIL network not done"); end
    if (cyc != NI + NH + n_stall) begin failures++; $display("FAIL cycles %0d", cyc); end
    foreach (eh[n]) begin
      checks++;
      if (int'(nn_hid_acc[n]) != eh[n]) begin failures++; $display("FAIL hid %0d got %0d exp %0d", n, nn_hid_acc[n], eh[n]); end
    end
    foreach (eo[k]) begin
      checks++;
      if (int'(nn_out_acc[k]) != eo[k]) begin failures++; $display("FAIL out %0d got %0d exp %0d", k, nn_out_acc[k], eo[k]); end
    end

    $display("mechanisms: gdf_ds=%0d ib_ds=%0d nn_ds=%0d nn_th=%0d stall=%0d phase=%0d wrap=%0d",
             n_gdf_ds, n_ib_ds, n_nn_ds, n_nn_th, n_stall, n_phase, n_wrap);
    if (n_gdf_ds == 0 || n_ib_ds == 0 || n_nn_ds == 0 || n_nn_th == 0 ||
        n_stall == 0 || n_phase == 0 || n_wrap == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
