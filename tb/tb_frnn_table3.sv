// tb_frnn_table3 -- the nine face-recognition configurations of the paper's
// cost / accuracy table, each as a full 960-40-7 network:
//   1 conventional, 2 natural (pixels 0..159), 3 TH_48^48, 4 DS_16, 5 DS_32,
//   6 natural + DS_16, 7 natural + DS_32, 8 natural + TH_48^48 + DS_16,
//   9 natural + TH_48^48 + DS_32 (the default build).
// DS is applied to pixels and weights alike. All nine networks see the same
// generated image (values 0..159, dark background below 48) and weights,
// with in_valid held high, and must finish in 960 + 40 cycles. Hidden and
// output accumulators are checked against a model of the arithmetic. The
// stand-in activation is hid_acc[11:4]. Classification accuracy cannot be
// measured here: the trained weights and the sigmoid are not available.
module tb_frnn_table3;
  localparam int NCFG = 9, NI = 960, NH = 40, NO = 7;
  localparam int NATV [NCFG] = '{255, 159, 255, 255, 255, 159, 159, 159, 159};
  localparam int THV  [NCFG] = '{0, 0, 48, 0, 0, 0, 0, 48, 48};
  localparam int DSV  [NCFG] = '{1, 1, 1, 16, 32, 16, 32, 16, 32};
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  logic [7:0]  pixel;
  logic [7:0]  w_hid [NH];
  logic [7:0]  w_out [NO];
  logic [7:0]  hid_act [NCFG][NH];
  logic [11:0] hid_acc [NCFG][NH];
  logic [11:0] out_acc [NCFG][NO];
  logic        busy [NCFG], out_phase [NCFG], done [NCFG];
  logic [9:0]  idx [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    frnn_net #(.NAT_HI(NATV[c]), .TH_X(THV[c]), .TH_Y(THV[c]), .DS_IMG(DSV[c]), .DS_W(DSV[c])) u_nn (
      .clk, .rst_n, .start, .in_valid, .pixel, .w_hid, .w_out,
      .hid_act(hid_act[c]), .hid_acc(hid_acc[c]), .out_acc(out_acc[c]),
      .busy(busy[c]), .out_phase(out_phase[c]), .idx(idx[c]), .done(done[c])
    );
    always_comb foreach (hid_act[c][j]) hid_act[c][j] = hid_acc[c][j][11:4];
  end

  always #5 clk = ~clk;

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

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    pixel = 0; foreach (w_hid[n]) w_hid[n] = 0; foreach (w_out[k]) w_out[k] = 0;
    // 32 x 30 image: dark background, brighter face region in the middle.
    foreach (img[i]) begin
      int x, y;
      x = i % 32; y = i / 32;
      img[i] = (x > 8 && x < 24 && y > 4 && y < 26) ? 60 + $urandom % 100 : $urandom % 48;
    end
    foreach (wh[n, i]) wh[n][i] = $urandom % 256;
    foreach (wo[k, j]) wo[k][j] = $urandom % 256;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    for (int i = 0; i < NI + NH; i++) begin
      in_valid = 1;
      if (i < NI) begin
        pixel = 8'(img[i]);
        foreach (w_hid[n]) w_hid[n] = 8'(wh[n][i]);
      end else begin
        foreach (w_out[k]) w_out[k] = 8'(wo[k][i - NI]);
      end
      @(negedge clk); cyc++;
    end
    in_valid = 0;
    for (int c = 0; c < NCFG; c++) begin
      foreach (eh[n]) begin
        eh[n] = 0;
        for (int i = 0; i < NI; i++)
          eh[n] = (eh[n] + ((pp(img[i], DSV[c], THV[c], THV[c]) * pp(wh[n][i], DSV[c], 0, 0)) >> 4)) % 4096;
      end
      foreach (eo[k]) begin
        eo[k] = 0;
        for (int j = 0; j < NH; j++)
          eo[k] = (eo[k] + ((((eh[j] >> 4) & 255) * wo[k][j]) >> 4)) % 4096;
      end
      checks++;
      if (!done[c] || cyc != NI + NH) begin failures++; $display("FAIL row %0d not done after %0d cycles", c + 1, cyc); end
      foreach (eh[n]) begin
        checks++;
        if (int'(hid_acc[c][n]) != eh[n]) begin failures++; $display("FAIL row %0d hid %0d got %0d exp %0d", c + 1, n, hid_acc[c][n], eh[n]); end
      end
      foreach (eo[k]) begin
        checks++;
        if (int'(out_acc[c][k]) != eo[k]) begin failures++; $display("FAIL row %0d out %0d got %0d exp %0d", c + 1, k, out_acc[c][k], eo[k]); end
      end
      $display("FRNN row %0d: out_acc[0..2] = %0d %0d %0d", c + 1, out_acc[c][0], out_acc[c][1], out_acc[c][2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
