// tb_dadda_tree17 -- checks the 17-operand carry-save tree adder.
//
// Random operand sets, sets with a single non-zero operand in every
// position, all zeros and all 255 (the largest sum, 4335) are applied; the
// result must equal the integer sum of the seventeen operands.
module tb_dadda_tree17;
  timeunit 1ns; timeprecision 1ps;

  int checks = 0, failures = 0;
  logic [16:0][7:0] op;
  logic [12:0]      sum;

  dadda_tree17 dut (.op(op), .sum(sum));

  task automatic apply();
    int exp_v = 0;
    #1;
    for (int i = 0; i < 17; i++) exp_v += int'(op[i]);
    checks++;
    if (int'(sum) != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL: sum %0d want %0d", sum, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = '0;  apply();
    op = '1;  apply();
    for (int i = 0; i < 17; i++)
      for (int v = 1; v < 256; v *= 2) begin
        op = '0; op[i] = 8'(v); apply();
        op = '1; op[i] = 8'(255 - v); apply();
      end
    for (int n = 0; n < 20000; n++) begin
      for (int i = 0; i < 17; i++) op[i] = 8'($urandom);
      apply();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
