// tb_mvcu -- checks one mean value calculator unit.
//
// Blocks of 16 rows of 16 pixels (random, all 255, all 0, and values just
// around multiples of 256 in the sum) are fed one row per pipeline step, with
// a few idle clocks between steps and several blocks back to back. After the
// step that follows a block's last row, `mean` must be floor(sum/256) and
// `mean_valid` must be high for exactly that one step.
module tb_mvcu;
  timeunit 1ns; timeprecision 1ps;
  import fp_pkg::*;

  logic clk = 0, rst_n = 0, adv = 0;
  logic [BLK-1:0][PIX_W-1:0] pix = '0;
  logic row_first = 0, row_last = 0;
  logic [PIX_W-1:0] mean;
  logic mean_valid;

  int checks = 0, failures = 0;

  mvcu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(logic [BLK-1:0][PIX_W-1:0] p, logic f, logic l);
    pix <= p; row_first <= f; row_last <= l; adv <= 1;
    @(posedge clk);
    adv <= 0;
    repeat ($urandom_range(0, 3)) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int prev_exp = -1;

  initial begin
    logic [BLK-1:0][PIX_W-1:0] p;
    int sum;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int blk = 0; blk < 60; blk++) begin
      sum = 0;
      for (int r = 0; r < BLK; r++) begin
        for (int c = 0; c < BLK; c++) begin
          case (blk % 4)
            0: p[c] = 8'($urandom);
            1: p[c] = 8'd255;
            2: p[c] = (blk == 2) ? 8'd0 : 8'($urandom_range(0, 40));
            default: p[c] = 8'($urandom_range(200, 255));
          endcase
          sum += int'(p[c]);
        end
        step(p, r == 0, r == BLK - 1);
        chk(mean_valid == (r == 0 && prev_exp >= 0), $sformatf("mean_valid blk %0d row %0d", blk, r));
        if (r == 0 && prev_exp >= 0) chk(int'(mean) == prev_exp, $sformatf("mean blk %0d: %0d want %0d", blk - 1, mean, prev_exp));
      end
      prev_exp = sum / 256;
    end
    step('0, 1'b1, 1'b0);
    chk(mean_valid && int'(mean) == prev_exp, "last block mean");
    step('0, 1'b0, 1'b0);
    chk(!mean_valid, "mean_valid falls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
