// tb_ppc_adder -- cascaded PPA. Three instances:
//   precise 12-bit adder (random operands, result modulo 2^12);
//   9-bit-output adder for DS_16 operands (every allowed pair);
//   12 = 10 + 11 bit adder whose operands are sums of DS_2-like values,
//   mirroring an inner filter adder (random allowed pairs).
module tb_ppc_adder;
  import ppc_pkg::*;
  int checks = 0, failures = 0;

  localparam vmask_t M16 = pre_mask(8, 16, 0, 0, 0, 255);
  localparam vmask_t MA  = sum_mask(M16, M16, 10);
  localparam vmask_t MB  = sum_mask(shl_mask(M16, 1), shl_mask(M16, 1), 11);

  logic [11:0] fa, fb, fs;
  logic [7:0]  da, db;
  logic [8:0]  ds;
  logic [9:0]  ia;
  logic [10:0] ib;
  logic [11:0] is;

  ppc_adder #(.WA(12), .WB(12), .WO(12)) u_full (.a(fa), .b(fb), .sum(fs));
  ppc_adder #(.WA(8), .WB(8), .WO(9), .MASK_A(M16), .MASK_B(M16)) u_ds (.a(da), .b(db), .sum(ds));
  ppc_adder #(.WA(10), .WB(11), .WO(12), .MASK_A(MA), .MASK_B(MB)) u_in (.a(ia), .b(ib), .sum(is));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      fa = 12'($urandom); fb = 12'($urandom);
      #1;
      checks++;
      if (fs != 12'(fa + fb)) begin failures++; $display("FAIL full %0d+%0d=%0d", fa, fb, fs); end
    end
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) begin
        da = 8'(x * 16); db = 8'(y * 16);
        #1;
        checks++;
        if (ds != 9'(x * 16 + y * 16)) begin failures++; $display("FAIL ds %0d+%0d=%0d", da, db, ds); end
      end
    for (int i = 0; i < 2000; i++) begin
      ia = 10'((($urandom % 16) + ($urandom % 16)) * 16);
      ib = 11'((($urandom % 16) + ($urandom % 16)) * 32);
      #1;
      checks++;
      if (is != 12'(ia + ib)) begin failures++; $display("FAIL inner %0d+%0d=%0d", ia, ib, is); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
