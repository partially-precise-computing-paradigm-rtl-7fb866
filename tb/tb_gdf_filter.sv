// tb_gdf_filter -- Gaussian filter datapath against a reference computed here:
// out = sum of kernel (1 2 1 / 2 4 2 / 1 2 1) times the DS-preprocessed pixels.
// The default instance (DS_16) and a conventional one (DS_1) see the same
// random windows, plus the all-255 window (largest sum, 4080 with DS_1).
module tb_gdf_filter;
  int checks = 0, failures = 0;
  logic [7:0]  p [9];
  logic [11:0] out16, out1;

  gdf_filter           u_ds16 (.p, .out(out16));
  gdf_filter #(.DS(1)) u_prec (.p, .out(out1));

  localparam int KW [9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};

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
    for (int n = 0; n < 3001; n++) begin
      foreach (p[i]) p[i] = (n == 3000) ? 8'hFF : 8'($urandom);
      #1;
      checks += 2;
      if (int'(out16) != ref_gdf(16)) begin failures++; $display("FAIL ds16 got %0d exp %0d", out16, ref_gdf(16)); end
      if (int'(out1)  != ref_gdf(1))  begin failures++; $display("FAIL ds1 got %0d exp %0d",  out1,  ref_gdf(1));  end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
