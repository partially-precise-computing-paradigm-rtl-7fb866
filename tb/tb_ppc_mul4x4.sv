// tb_ppc_mul4x4 -- 4x4 PPM segment: every allowed row must give a * b.
// A precise instance (all 256 rows) and one restricted to a in {0,4,8,12}
// and b in 8..15 (its allowed rows).
module tb_ppc_mul4x4;
  int checks = 0, failures = 0;
  logic [3:0] a, b;
  logic [7:0] p_f, p_p;

  ppc_mul4x4 u_full (.a, .b, .p(p_f));
  ppc_mul4x4 #(.VA(16'h1111), .VB(16'hFF00)) u_part (.a, .b, .p(p_p));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      {a, b} = 8'(i);
      #1;
      checks++;
      if (p_f != a * b) begin failures++; $display("FAIL full %0d*%0d=%0d", a, b, p_f); end
      if (a[1:0] == 2'b00 && b[3]) begin
        checks++;
        if (p_p != a * b) begin failures++; $display("FAIL part %0d*%0d=%0d", a, b, p_p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
