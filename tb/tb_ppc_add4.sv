// tb_ppc_add4 -- 4-bit PPA segment: every allowed row must give a + b + cin.
// One instance is precise (all 512 rows checked), one allows only even
// nibbles of a, nibbles 0..7 of b and carry 0 (its allowed rows checked).
module tb_ppc_add4;
  int checks = 0, failures = 0;
  logic [3:0] a, b, s_f, s_p;
  logic       cin, c_f, c_p;

  ppc_add4 u_full (.a, .b, .cin, .s(s_f), .cout(c_f));
  ppc_add4 #(.VA(16'h5555), .VB(16'h00FF), .VC(2'b01))
    u_part (.a, .b, .cin, .s(s_p), .cout(c_p));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      {cin, a, b} = 9'(i);
      #1;
      checks++;
      if ({c_f, s_f} != 5'(a) + 5'(b) + 5'(cin)) begin
        failures++; $display("FAIL full a=%0d b=%0d c=%0d", a, b, cin);
      end
      if (a[0] == 1'b0 && b < 8 && cin == 1'b0) begin
        checks++;
        if ({c_p, s_p} != 5'(a) + 5'(b)) begin
          failures++; $display("FAIL part a=%0d b=%0d", a, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
