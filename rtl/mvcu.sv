// mvcu -- mean value calculator unit: the threshold of one 16x16 block.
//
// One pipeline step (`adv`) presents one 16-pixel row of the block. The
// 17-input tree adder adds the 16 pixels and the low 8 bits of the previous
// step's result, and the 13-bit result is registered. Its top 5 bits are
// added by a CLA into an 8-bit accumulator register. Because the low byte is
// always carried into the next row's sum, the accumulator after the 16th row
// holds exactly floor(block sum / 256), the block mean: the division by 256
// is the 8-bit shift the wiring does for free.
//
// Timing: the row on `pix` at step n is in the 13-bit register after step n,
// and in the accumulator after step n+1. `mean_valid` is high while `mean`
// holds a finished block, i.e. for one step after the block's last row has
// been accumulated. `row_first` marks the first row of a block: the feedback
// byte and the accumulator start from zero for it.
//
// Paper: the structure (17-input adder with the 8-bit low part fed back, the
// 13-bit register, 5-bit MSB into a CLA with an 8-bit register). Own choice:
// the `row_first`/`row_last` control that clears the feedback between blocks
// and flags a finished mean, and a clock enable instead of a divided clock.
module mvcu
  import fp_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      adv,
  input  logic [BLK-1:0][PIX_W-1:0] pix,
  input  logic                      row_first,
  input  logic                      row_last,
  output logic [PIX_W-1:0]          mean,
  output logic                      mean_valid
);

  logic [16:0][PIX_W-1:0] op;
  logic [SUM_W-1:0]       tree_sum;
  logic [SUM_W-1:0]       s_q;          // the 13-bit register
  logic                   s_first, s_last;
  logic [PIX_W-1:0]       acc_in, acc_next;

  assign op[BLK-1:0] = pix;
  assign op[16]      = row_first ? '0 : s_q[PIX_W-1:0];   // low-byte feedback

  dadda_tree17 u_tree (.op(op), .sum(tree_sum));

  // accumulator: starts again with the first row of a block
  assign acc_in = s_first ? '0 : mean;

  cla #(.W(PIX_W)) u_acc (
    .a   (acc_in),
    .b   (PIX_W'(s_q[SUM_W-1:PIX_W])),
    .cin (1'b0),
    .sum (acc_next),
    .cout()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q        <= '0;
      s_first    <= 1'b0;
      s_last     <= 1'b0;
      mean       <= '0;
      mean_valid <= 1'b0;
    end else if (adv) begin
      s_q        <= tree_sum;
      s_first    <= row_first;
      s_last     <= row_last;
      mean       <= acc_next;
      mean_valid <= s_last;
    end
  end

endmodule
