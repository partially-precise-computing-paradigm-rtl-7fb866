// tb_ppc_preproc -- exhaustive check of the preprocessing unit.
// Three instances (off, DS_16, TH_48^48 + DS_32) see every 8-bit input; the
// expected value is computed here from the definitions
// TH_x^y: v < x -> y, DS_x: v - (v mod x).
module tb_ppc_preproc;
  int checks = 0, failures = 0;
  logic [7:0] din, d_off, d_ds, d_thds;

  ppc_preproc #(.DS(1), .TH_X(0), .TH_Y(0))  u_off  (.din, .dout(d_off));
  ppc_preproc #(.DS(16), .TH_X(0))           u_ds   (.din, .dout(d_ds));
  ppc_preproc                                u_thds (.din, .dout(d_thds));

  function automatic int ref_pp(int v, int ds, int tx, int ty);
    int t;
    t = (v < tx) ? ty : v;
    return t - (t % ds);
  endfunction

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s din=%0d got=%0d exp=%0d", what, din, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      din = 8'(v);
      #1;
      check(d_off,  v,                      "off");
      check(d_ds,   ref_pp(v, 16, 0, 0),    "ds16");
      check(d_thds, ref_pp(v, 32, 48, 48),  "th48+ds32");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
