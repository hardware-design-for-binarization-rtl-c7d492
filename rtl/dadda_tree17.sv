// dadda_tree17 -- adds seventeen 8-bit operands; 13-bit result.
//
// A carry-save tree following Dadda's height sequence: a first layer of four
// carry-save adders turns the 17 operands into 13, and five more layers reduce
// 13 -> 9 -> 6 -> 4 -> 3 -> 2. Each layer is a csa_layer: the first 3*n operands
// enter n carry-save adders (n = operands in minus operands out) and the rest
// pass straight through. The final two words are added by a carry look-ahead adder.
// Purely combinational; 17 * 255 = 4335 fits the 13-bit result.
//
// Paper: seventeen 8-bit inputs, four CSAs in the first layer to reach 13
// operands, five further CSA layers to reach 2, and a final CLA. Own choice:
// the reduction works on whole 13-bit words rather than on the bit columns of
// a dot diagram (the paper's figures of the five CSA cell types are not
// reproduced), which keeps the layer count and operand counts the paper gives.
module dadda_tree17
  import fp_pkg::*;
(
  input  logic [16:0][PIX_W-1:0] op,
  output logic [SUM_W-1:0]       sum
);

  logic [16:0][SUM_W-1:0] v0;
  logic [12:0][SUM_W-1:0] v1;
  logic [8:0][SUM_W-1:0]  v2;
  logic [5:0][SUM_W-1:0]  v3;
  logic [3:0][SUM_W-1:0]  v4;
  logic [2:0][SUM_W-1:0]  v5;
  logic [1:0][SUM_W-1:0]  v6;

  for (genvar i = 0; i < 17; i++) begin : g_in
    assign v0[i] = SUM_W'(op[i]);
  end

  csa_layer #(.W(SUM_W), .NIN(17), .NOUT(13)) u_l0 (.din(v0), .dout(v1));
  csa_layer #(.W(SUM_W), .NIN(13), .NOUT(9))  u_l1 (.din(v1), .dout(v2));
  csa_layer #(.W(SUM_W), .NIN(9),  .NOUT(6))  u_l2 (.din(v2), .dout(v3));
  csa_layer #(.W(SUM_W), .NIN(6),  .NOUT(4))  u_l3 (.din(v3), .dout(v4));
  csa_layer #(.W(SUM_W), .NIN(4),  .NOUT(3))  u_l4 (.din(v4), .dout(v5));
  csa_layer #(.W(SUM_W), .NIN(3),  .NOUT(2))  u_l5 (.din(v5), .dout(v6));

  cla #(.W(SUM_W)) u_cla (
    .a   (v6[0]),
    .b   (v6[1]),
    .cin (1'b0),
    .sum (sum),
    .cout()
  );

endmodule
