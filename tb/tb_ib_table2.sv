// tb_ib_table2 -- the eleven image-blending configurations of the paper's
// cost / accuracy table: conventional; natural sparsity only; DS_2 .. DS_32;
// natural + DS_2 .. DS_16. Two generated 64 x 64 images are blended with
// alpha = 0.5 (coef1 = 127 or 128 would break the natural range, so
// coef1 = 127, coef2 = 128). Every output is checked against the arithmetic
// reference; PSNR against the conventional build is reported. Checked:
// natural sparsity alone loses nothing (output identical to conventional),
// natural + DS_x equals DS_x, and PSNR falls as DS grows.
module tb_ib_table2;
  localparam int NCFG = 11, W = 64, H = 64;
  localparam int DSV [NCFG] = '{1, 1, 2, 4, 8, 16, 32, 2, 4, 8, 16};
  localparam bit NAT [NCFG] = '{0, 1, 0, 0, 0, 0, 0, 1, 1, 1, 1};
  int checks = 0, failures = 0;

  logic [7:0] i1, i2, c1, c2;
  logic [7:0] pix [NCFG];
  real        sse [NCFG];
  real        psnr [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    ib_blender #(.DS(DSV[c]), .NATURAL(NAT[c])) u_ib
      (.img1(i1), .coef1(c1), .img2(i2), .coef2(c2), .pix(pix[c]));
  end

  function automatic int ref_ib(int ds);
    int a, b, x, y;
    x = int'(i1) - int'(i1) % ds; a = int'(c1) - int'(c1) % ds;
    y = int'(i2) - int'(i2) % ds; b = int'(c2) - int'(c2) % ds;
    return ((x * a) >> 8) + ((y * b) >> 8);
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
    foreach (sse[c]) sse[c] = 0.0;
    c1 = 8'd127; c2 = 8'd128;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        v  = (x * 3) + (($urandom % 32) + ($urandom % 32) + ($urandom % 32)) / 2;
        i1 = 8'((v > 255) ? 255 : v);
        v  = (y * 3) + (($urandom % 32) + ($urandom % 32) + ($urandom % 32)) / 2;
        i2 = 8'((v > 255) ? 255 : v);
        #1;
        for (int c = 0; c < NCFG; c++) begin
          checks++;
          if (int'(pix[c]) != ref_ib(DSV[c])) begin
            failures++; $display("FAIL cfg %0d got %0d exp %0d", c, pix[c], ref_ib(DSV[c]));
          end
          sse[c] += real'((int'(pix[c]) - int'(pix[0])) ** 2);
        end
        checks += 5;
        if (pix[1] != pix[0]) failures++;
        for (int c = 7; c < NCFG; c++) if (pix[c] != pix[c - 5]) failures++;
      end
    for (int c = 1; c < NCFG; c++) begin
      psnr[c] = (sse[c] == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 / (sse[c] / real'(W * H)));
      $display("IB row %0d (natural=%0d, DS_%0d): PSNR %0.1f dB", c + 1, NAT[c], DSV[c], psnr[c]);
    end
    for (int c = 3; c < 7; c++) begin
      checks++;
      if (psnr[c] >= psnr[c - 1]) begin failures++; $display("FAIL PSNR does not fall at DS_%0d", DSV[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
