// ppc_add4 -- 4-bit partially-precise adder (PPA) segment.
//
// The segment adds two nibbles and a carry, {cout, s} = a + b + cin, but is
// required to be exact only for the rows of its truth table that can occur:
// a row is a don't-care (DC) unless VA[a], VB[b] and VC[cin] are all set.
// DC rows are written as 'x so that synthesis is free to choose them; with all
// masks full the segment is a conventional precise 4-bit adder.
// The paper builds its wider PPAs from such 4-bit segments (its supplementary
// Fig. 3) because its truth-table synthesis does not scale past them; the DC
// encoding with 'x and the masks as parameters are this design's choices.
//
// Interface: purely combinational. VA/VB: allowed operand nibbles, VC: bit 0
// if carry 0 can occur, bit 1 if carry 1 can.
module ppc_add4 #(
  parameter logic [15:0] VA = 16'hFFFF,
  parameter logic [15:0] VB = 16'hFFFF,
  parameter logic [1:0]  VC = 2'b11
) (
  input  logic [3:0] a,
  input  logic [3:0] b,
  input  logic       cin,
  output logic [3:0] s,
  output logic       cout
);
  always_comb begin
    if (VA[a] && VB[b] && VC[cin]) {cout, s} = 5'(a) + 5'(b) + 5'(cin);
    else                           {cout, s} = 'x;
  end
endmodule
