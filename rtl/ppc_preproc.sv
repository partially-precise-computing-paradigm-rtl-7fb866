// ppc_preproc -- intentional-sparsity preprocessing of one unsigned input.
//
// Two preprocessings are applied in a fixed order:
//   TH_x^y  thresholding: every value below TH_X is replaced by TH_Y
//           (a comparator and a multiplexer; TH_X = 0 switches it off);
//   DS_x    down-sampling: value i becomes i - (i mod DS), DS a power of two,
//           which is only the clearing of the log2(DS) low bits (no gates).
// Both follow the definitions in the paper. Applying TH before DS when both are
// used is this design's choice (the paper lists the combination
// "TH_48^48 + DS_32" without an order); it keeps every output on the DS grid.
//
// The defaults are the image preprocessing of the paper's last face-recognition
// configuration (TH_48^48 with DS_32); DS = 1 and TH_X = 0 make it transparent.
//
// Interface: din -> dout, WL bits, purely combinational (zero latency).
// With TH_X = 0 the threshold comparison is constant false, which a lint tool
// reports; the comparator then disappears.
// The same computation exists as ppc_pkg::preproc_value() for range analysis.
module ppc_preproc #(
  parameter int unsigned WL   = 8,
  parameter int unsigned DS   = 32,  // power of two, 1 = no down-sampling
  parameter int unsigned TH_X = 48,  // 0 = no thresholding
  parameter int unsigned TH_Y = 48
) (
  input  logic [WL-1:0] din,
  output logic [WL-1:0] dout
);
  localparam int unsigned K = $clog2(DS);
  localparam logic [WL-1:0] KEEP = ~((WL)'((1 << K) - 1));

  initial begin
    assert (DS == (1 << K)) else $error("DS must be a power of two");
    assert (TH_Y < (1 << WL)) else $error("TH_Y does not fit WL bits");
  end

  logic [WL-1:0] th;

  always_comb begin
    th   = (32'(din) < TH_X) ? WL'(TH_Y) : din;
    dout = th & KEEP;
  end
endmodule
