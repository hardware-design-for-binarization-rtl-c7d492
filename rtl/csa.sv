// csa -- word-level carry-save adder (3:2 compressor).
//
// Reduces three W-bit operands to a sum word and a carry word whose total is
// the same: sum = a ^ b ^ c, carry = majority(a, b, c) shifted left by one.
// Purely combinational. Used as the cell of the carry-save tree in
// dadda_tree17; the paper builds that tree from carry-save adders, the
// word-level form of the cell is this design's choice.
module csa #(
  parameter int unsigned W = 13
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] s,
  output logic [W-1:0] cy
);
  logic [W-1:0] maj;
  assign s   = a ^ b ^ c;
  assign maj = (a & b) | (a & c) | (b & c);
  assign cy  = {maj[W-2:0], 1'b0};
endmodule
