// tb_ppc_dc_rows -- range analysis against the hardware and against the
// paper's DC-row count.
// For each preprocessing setting used in the three datapaths, every 8-bit
// input in the natural range is passed through ppc_preproc; the set of
// outputs must equal the value set ppc_pkg::pre_mask() computes (no value
// missing, none extra). For DS_x on both operands of an 8-bit two-input
// block, the number of DC truth-table rows must equal the paper's
// Eq. (1), 2^(2 WL) (1 - 1/x^2): 75 %, 93.75 % and 98.4 % for DS_2, DS_4, DS_8.
module tb_ppc_dc_rows;
  import ppc_pkg::*;
  localparam int NCFG = 6;
  localparam int DSV  [NCFG] = '{2, 4, 8, 16, 32, 32};
  localparam int THV  [NCFG] = '{0, 0, 0, 0, 0, 48};
  localparam int NATV [NCFG] = '{255, 255, 255, 255, 255, 159};
  int checks = 0, failures = 0;

  logic [7:0] din;
  logic [7:0] dout [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    ppc_preproc #(.DS(DSV[c]), .TH_X(THV[c]), .TH_Y(THV[c])) u_pre (.din, .dout(dout[c]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vmask_t seen [NCFG];
    vmask_t m;
    longint n, dc, exp_dc;
    foreach (seen[c]) seen[c] = '0;
    for (int v = 0; v < 256; v++) begin
      din = 8'(v);
      #1;
      for (int c = 0; c < NCFG; c++) if (v <= NATV[c]) seen[c][dout[c]] = 1'b1;
    end
    for (int c = 0; c < NCFG; c++) begin
      m = pre_mask(8, DSV[c], THV[c], THV[c], 0, NATV[c]);
      checks++;
      if (m != seen[c]) begin failures++; $display("FAIL value set of config %0d", c); end
      n  = longint'(mask_count(m));
      dc = 65536 - n * n;
      if (THV[c] == 0 && NATV[c] == 255) begin
        exp_dc = 65536 - 65536 / (DSV[c] * DSV[c]);
        checks++;
        if (dc != exp_dc) begin failures++; $display("FAIL DS_%0d: %0d DC rows, Eq. (1) gives %0d", DSV[c], dc, exp_dc); end
      end
      $display("DS_%0d TH_%0d natural 0..%0d: %0d values, %0.2f %% DC rows", DSV[c], THV[c], NATV[c],
               n, 100.0 * real'(dc) / 65536.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
