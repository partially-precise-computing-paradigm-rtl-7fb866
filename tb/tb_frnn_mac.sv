// tb_frnn_mac -- neuron MAC: random bursts of (image, weight) pairs drawn from
// the default value sets (image in {32,64,96,128}: natural 0..159, TH_48^48,
// DS_32; weight a multiple of 32), with random enable gaps and clears. The
// expected accumulator, sum of (img*w)[15:4] modulo 4096, is kept here and
// compared every cycle, one cycle after the inputs were applied.
module tb_frnn_mac;
  int checks = 0, failures = 0, wraps = 0;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [7:0] img, w;
  logic [11:0] acc;
  int model;

  frnn_mac u_dut (.clk, .rst_n, .clr, .en, .img, .w, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0; img = 0; w = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (int'(acc) != model) begin failures++; $display("FAIL n=%0d acc=%0d exp=%0d", n, acc, model); end
      clr = ($urandom % 200) == 0;
      en  = ($urandom % 4) != 0;
      img = 8'(32 * (1 + $urandom % 4));
      w   = 8'(32 * ($urandom % 8));
      if (clr) model = 0;
      else if (en) begin
        if (model + ((int'(img) * int'(w)) >> 4) > 4095) wraps++;
        model = (model + ((int'(img) * int'(w)) >> 4)) % 4096;
      end
    end
    if (wraps == 0) begin failures++; $display("FAIL accumulator never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
