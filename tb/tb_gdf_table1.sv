// tb_gdf_table1 -- the Gaussian-filter configurations of the paper's cost /
// accuracy table: conventional (DS_1) and DS_2, DS_4, DS_8, DS_16 on all nine
// pixels. A generated 64 x 64 test image (smooth gradient plus a bell-shaped
// noise term, so its histogram is roughly Gaussian) is filtered by all five
// builds. Every output is checked against the arithmetic reference, and the
// PSNR of each PPC build's normalised output (out[11:4]) against the
// conventional one is reported. Checked trend: PSNR falls as DS grows and
// DS_16 stays above 25 dB (the paper reports 51, 44, 37 and 31 dB on its
// own image).
module tb_gdf_table1;
  localparam int NCFG = 5, W = 64, H = 64;
  localparam int DSV [NCFG] = '{1, 2, 4, 8, 16};
  localparam int KW [9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};
  int checks = 0, failures = 0;

  logic [7:0]  p [9];
  logic [11:0] out [NCFG];
  int          im [H][W];
  real         sse [NCFG];
  real         psnr [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    gdf_filter #(.DS(DSV[c])) u_gdf (.p, .out(out[c]));
  end

  function automatic int ref_gdf(int ds);
    int s;
    s = 0;
    for (int i = 0; i < 9; i++) s += KW[i] * (int'(p[i]) - int'(p[i]) % ds);
    return s;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    foreach (im[y, x]) begin
      v = (x * 2 + y) + (($urandom % 64) + ($urandom % 64) + ($urandom % 64) + ($urandom % 64)) / 2;
      im[y][x] = (v > 255) ? 255 : v;
    end
    foreach (sse[c]) sse[c] = 0.0;
    for (int y = 1; y < H - 1; y++)
      for (int x = 1; x < W - 1; x++) begin
        for (int dy = 0; dy < 3; dy++)
          for (int dx = 0; dx < 3; dx++) p[dy * 3 + dx] = 8'(im[y + dy - 1][x + dx - 1]);
        #1;
        for (int c = 0; c < NCFG; c++) begin
          checks++;
          if (int'(out[c]) != ref_gdf(DSV[c])) begin
            failures++; $display("FAIL DS%0d got %0d exp %0d", DSV[c], out[c], ref_gdf(DSV[c]));
          end
          sse[c] += real'((int'(out[c] >> 4) - int'(out[0] >> 4)) ** 2);
        end
      end
    for (int c = 1; c < NCFG; c++) begin
      psnr[c] = (sse[c] == 0.0) ? 99.0
              : 10.0 * $log10(255.0 * 255.0 / (sse[c] / real'((W - 2) * (H - 2))));
      $display("GDF DS_%0d: PSNR %0.1f dB", DSV[c], psnr[c]);
      if (c > 1) begin
        checks++;
        if (psnr[c] >= psnr[c - 1]) begin failures++; $display("FAIL PSNR does not fall at DS_%0d", DSV[c]); end
      end
    end
    checks++;
    if (psnr[NCFG - 1] < 25.0) begin failures++; $display("FAIL DS_16 PSNR below 25 dB"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
