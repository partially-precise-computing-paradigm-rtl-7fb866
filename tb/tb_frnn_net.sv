// tb_frnn_net -- network controller and datapath at reduced size
// (N_IN = 24, N_HID = 5, N_OUT = 3, default preprocessing).
// Random images (natural range 0..159) and weights are fed; the hidden and
// output accumulators are compared with a model computed here. The stand-in
// activation returned on hid_act is hid_acc[11:4] (no sigmoid is built).
// Image 0 is fed with in_valid always high and must take N_IN + N_HID cycles;
// images 1 and 2 have random in_valid gaps (stalls).
module tb_frnn_net;
  localparam int NI = 24, NH = 5, NO = 3;
  int checks = 0, failures = 0, stalls = 0;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  logic [7:0]  pixel;
  logic [7:0]  w_hid [NH];
  logic [7:0]  w_out [NO];
  logic [7:0]  hid_act [NH];
  logic [11:0] hid_acc [NH];
  logic [11:0] out_acc [NO];
  logic        busy, out_phase, done;
  logic [$clog2(NI)-1:0] idx;

  int img [NI];
  int wh [NH][NI];
  int wo [NO][NH];
  int eh [NH];
  int eo [NO];

  frnn_net #(.N_IN(NI), .N_HID(NH), .N_OUT(NO)) u_dut (.*);

  always #5 clk = ~clk;
  always_comb foreach (hid_act[j]) hid_act[j] = hid_acc[j][11:4];

  function automatic int pp(int v, int ds, int tx, int ty);
    int t;
    t = (v < tx) ? ty : v;
    return t - (t % ds);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    pixel = 0; foreach (w_hid[n]) w_hid[n] = 0; foreach (w_out[k]) w_out[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      foreach (img[i]) img[i] = $urandom % 160;
      foreach (wh[n, i]) wh[n][i] = $urandom % 256;
      foreach (wo[k, j]) wo[k][j] = $urandom % 256;
      foreach (eh[n]) begin
        eh[n] = 0;
        for (int i = 0; i < NI; i++)
          eh[n] = (eh[n] + ((pp(img[i], 32, 48, 48) * pp(wh[n][i], 32, 0, 0)) >> 4)) % 4096;
      end
      foreach (eo[k]) begin
        eo[k] = 0;
        for (int j = 0; j < NH; j++)
          eo[k] = (eo[k] + ((((eh[j] >> 4) & 255) * wo[k][j]) >> 4)) % 4096;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0;
      for (int i = 0; i < NI + NH; i++) begin
        while (t > 0 && ($urandom % 3) == 0) begin
          in_valid = 0; stalls++;
          @(negedge clk); cyc++;
        end
        checks++;
        if (int'(idx) != ((i < NI) ? i : i - NI) || out_phase != (i >= NI)) begin
          failures++; $display("FAIL t=%0d step %0d idx=%0d out_phase=%0d", t, i, idx, out_phase);
        end
        in_valid = 1;
        if (i < NI) begin
          pixel = 8'(img[i]);
          foreach (w_hid[n]) w_hid[n] = 8'(wh[n][i]);
        end else begin
          foreach (w_out[k]) w_out[k] = 8'(wo[k][i - NI]);
        end
        @(negedge clk); cyc++;
      end
      in_valid = 0;
      checks++;
      if (!done || busy) begin failures++; $display("FAIL t=%0d not done", t); end
      if (t == 0) begin
        checks++;
        if (cyc != NI + NH) begin failures++; $display("FAIL latency %0d", cyc); end
      end
      foreach (eh[n]) begin
        checks++;
        if (int'(hid_acc[n]) != eh[n]) begin failures++; $display("FAIL t=%0d hid %0d got %0d exp %0d", t, n, hid_acc[n], eh[n]); end
      end
      foreach (eo[k]) begin
        checks++;
        if (int'(out_acc[k]) != eo[k]) begin failures++; $display("FAIL t=%0d out %0d got %0d exp %0d", t, k, out_acc[k], eo[k]); end
      end
      repeat (3) @(negedge clk);
      checks++;
      if (!done) begin failures++; $display("FAIL done not held"); end
    end
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
