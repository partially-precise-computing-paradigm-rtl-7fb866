// tb_ib_blender -- image blending against a reference computed here:
// pix = (ds(img1) ds(alpha)) >> 8 + (ds(img2) ds(255 - alpha)) >> 8,
// alpha in 0..127, for the default (natural + DS_16) and the conventional
// (no natural range, DS_1) configuration.
module tb_ib_blender;
  int checks = 0, failures = 0;
  logic [7:0] i1, i2, c1, c2, pix_d, pix_c;

  ib_blender                             u_def  (.img1(i1), .coef1(c1), .img2(i2), .coef2(c2), .pix(pix_d));
  ib_blender #(.DS(1), .NATURAL(1'b0))   u_conv (.img1(i1), .coef1(c1), .img2(i2), .coef2(c2), .pix(pix_c));

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
    for (int n = 0; n < 5000; n++) begin
      i1 = 8'($urandom); i2 = 8'($urandom);
      c1 = (n == 0) ? 8'd127 : 8'($urandom % 128);
      if (n == 0) begin i1 = 8'hFF; i2 = 8'hFF; end
      c2 = 8'd255 - c1;
      #1;
      checks += 2;
      if (int'(pix_d) != ref_ib(16)) begin failures++; $display("FAIL def got %0d exp %0d", pix_d, ref_ib(16)); end
      if (int'(pix_c) != ref_ib(1))  begin failures++; $display("FAIL conv got %0d exp %0d", pix_c, ref_ib(1)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
