// cla -- carry look-ahead adder built from 4-bit look-ahead groups.
//
// Inside each group every carry is computed directly from the generate
// (a & b) and propagate (a ^ b) terms of the lower bits and the group's carry
// in; the groups pass a group carry from one to the next (c_out = G | P & c_in).
// Purely combinational; W need not be a multiple of 4 (the top group is
// padded with zeros).
//
// The paper finishes its tree adder with 4-bit carry look-ahead adders and
// uses a CLA to accumulate the block sum; the group size is the paper's, the
// generic width and the chaining of the groups are this design's choice.
module cla #(
  parameter int unsigned W = 13
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  localparam int unsigned NG = (W + 3) / 4;
  localparam int unsigned WP = NG * 4;

  logic [WP-1:0] ap, bp, g, p, s;
  logic [WP:0]   c;

  assign ap = WP'(a);
  assign bp = WP'(b);
  assign g  = ap & bp;
  assign p  = ap ^ bp;
  assign c[0] = cin;

  for (genvar k = 0; k < NG; k++) begin : g_grp
    localparam int B = 4 * k;
    // look-ahead carries inside the group
    assign c[B+1] = g[B] | (p[B] & c[B]);
    assign c[B+2] = g[B+1] | (p[B+1] & g[B]) | (p[B+1] & p[B] & c[B]);
    assign c[B+3] = g[B+2] | (p[B+2] & g[B+1]) | (p[B+2] & p[B+1] & g[B])
                  | (p[B+2] & p[B+1] & p[B] & c[B]);
    assign c[B+4] = g[B+3] | (p[B+3] & g[B+2]) | (p[B+3] & p[B+2] & g[B+1])
                  | (p[B+3] & p[B+2] & p[B+1] & g[B])
                  | (p[B+3] & p[B+2] & p[B+1] & p[B] & c[B]);
  end

  assign s    = p ^ c[WP-1:0];
  assign sum  = s[W-1:0];
  assign cout = c[W];
endmodule
