// tb_ppc_mul8x8 -- 8x8 PPM from four 4x4 segments. Instances:
//   precise, full 16-bit product: all 65536 operand pairs;
//   DS_16 on both operands: all allowed pairs;
//   coefficient restricted to 128..255 with DS_16, 8-bit truncated output
//   (image blending Multiplier-B): all allowed pairs.
module tb_ppc_mul8x8;
  import ppc_pkg::*;
  int checks = 0, failures = 0;

  localparam vmask_t M16 = pre_mask(8, 16, 0, 0, 0, 255);
  localparam vmask_t MHI = pre_mask(8, 16, 0, 0, 128, 255);

  logic [7:0]  a, b;
  logic [15:0] p_f, p_ds;
  logic [7:0]  p_tr;

  ppc_mul8x8 u_full (.a, .b, .p(p_f));
  ppc_mul8x8 #(.MASK_A(M16), .MASK_B(M16)) u_ds (.a, .b, .p(p_ds));
  ppc_mul8x8 #(.MASK_A(M16), .MASK_B(MHI), .OUT_WL(8)) u_tr (.a, .b, .p(p_tr));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      {a, b} = 16'(i);
      #1;
      checks++;
      if (p_f != 16'(a * b)) begin failures++; if (failures < 10) $display("FAIL full %0d*%0d=%0d", a, b, p_f); end
      if (a[3:0] == 0 && b[3:0] == 0) begin
        checks++;
        if (p_ds != 16'(a * b)) begin failures++; if (failures < 10) $display("FAIL ds %0d*%0d=%0d", a, b, p_ds); end
        if (b[7]) begin
          checks++;
          if (p_tr != 8'((32'(a) * 32'(b)) >> 8)) begin
            failures++; if (failures < 10) $display("FAIL trunc %0d*%0d=%0d", a, b, p_tr);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
