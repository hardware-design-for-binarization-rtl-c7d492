// tb_dilation -- checks the 2x2 dilation on random rows.
//
// Two frames of 24 random 32-pixel rows (sparse and dense) are presented
// one per step. For every row the output must be the OR of the row, the row
// shifted by one column, and the same two for the previous row of the same
// frame (none above a frame's first row, none right of the last column).
module tb_dilation;
  timeunit 1ns; timeprecision 1ps;
  import fp_pkg::*;

  localparam int W = 32;
  localparam int H = 24;

  logic clk = 0, rst_n = 0, adv = 0;
  logic [W-1:0] in_row = '0, out_row;
  row_tag_t in_tag = '0, out_tag;

  int checks = 0, failures = 0;

  dilation #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] prev, cur, exp_row;
    int set_by_dil = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    prev = '0;
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < H; r++) begin
        cur = (r % 2) ? W'($urandom) & W'($urandom) & W'($urandom) : W'($urandom);
        in_row <= cur;
        in_tag <= '{valid: 1'b1, first: r == 0, last: r == H - 1, blk_first: 1'b0, blk_last: 1'b0};
        @(negedge clk);
        for (int c = 0; c < W; c++)
          exp_row[c] = cur[c] | (c + 1 < W && cur[c + 1]) |
                       (r > 0 && (prev[c] | (c + 1 < W && prev[c + 1])));
        checks += 2;
        if (out_row !== exp_row) begin
          failures++;
          $display("FAIL: frame %0d row %0d got %b want %b", f, r, out_row, exp_row);
        end
        if (out_tag !== in_tag) failures++;
        set_by_dil += $countones(exp_row & ~cur);
        adv <= 1;
        @(posedge clk);
        adv <= 0;
        @(posedge clk);
        prev = cur;
      end
    checks++;
    if (set_by_dil == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
