// tb_ppc_error_eq -- probability of error of DS-preprocessed PPC blocks.
// For DS_x (x = 2, 4, 8, 16) on both inputs of an 8-bit adder and an 8x8
// multiplier, all 65536 raw input pairs are preprocessed by ppc_preproc and
// fed to the partially-precise block built for the resulting value sets; a
// pair counts as an error when the result differs from the precise result
// of the raw inputs. The error counts must equal the closed forms
//   adder:       PE = 1 - 1/x^2
//   multiplier:  PE = 1 - (1/x^2 + 2/2^WL - 2/(x 2^WL))
// (a product is still right when either raw input is 0).
module tb_ppc_error_eq;
  import ppc_pkg::*;
  localparam int NCFG = 4;
  localparam int DSV [NCFG] = '{2, 4, 8, 16};
  int checks = 0, failures = 0;

  logic [7:0]  a, b;
  logic [7:0]  qa [NCFG], qb [NCFG];
  logic [8:0]  s  [NCFG];
  logic [15:0] p  [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam vmask_t M = pre_mask(8, DSV[c], 0, 0, 0, 255);
    ppc_preproc #(.DS(DSV[c]), .TH_X(0), .TH_Y(0)) u_pa (.din(a), .dout(qa[c]));
    ppc_preproc #(.DS(DSV[c]), .TH_X(0), .TH_Y(0)) u_pb (.din(b), .dout(qb[c]));
    ppc_adder  #(.WA(8), .WB(8), .WO(9), .MASK_A(M), .MASK_B(M)) u_add (.a(qa[c]), .b(qb[c]), .sum(s[c]));
    ppc_mul8x8 #(.MASK_A(M), .MASK_B(M)) u_mul (.a(qa[c]), .b(qb[c]), .p(p[c]));
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int err_add [NCFG], err_mul [NCFG];
    int ok_add, ok_mul;
    foreach (err_add[c]) begin err_add[c] = 0; err_mul[c] = 0; end
    for (int i = 0; i < 65536; i++) begin
      {a, b} = 16'(i);
      #1;
      for (int c = 0; c < NCFG; c++) begin
        if (s[c] != 9'(a) + 9'(b)) err_add[c]++;
        if (p[c] != 16'(a) * 16'(b)) err_mul[c]++;
      end
    end
    for (int c = 0; c < NCFG; c++) begin
      ok_add = 65536 / (DSV[c] * DSV[c]);
      ok_mul = ok_add + 2 * (256 - 256 / DSV[c]);
      checks += 2;
      if (err_add[c] != 65536 - ok_add) begin failures++; $display("FAIL adder DS_%0d: %0d errors, expected %0d", DSV[c], err_add[c], 65536 - ok_add); end
      if (err_mul[c] != 65536 - ok_mul) begin failures++; $display("FAIL multiplier DS_%0d: %0d errors, expected %0d", DSV[c], err_mul[c], 65536 - ok_mul); end
      $display("DS_%0d: PE adder %0.4f, PE multiplier %0.4f", DSV[c], real'(err_add[c]) / 65536.0, real'(err_mul[c]) / 65536.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
