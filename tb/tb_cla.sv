// tb_cla -- checks the carry look-ahead adder.
//
// An 8-bit instance is checked exhaustively (all operand pairs, both carry
// inputs); a 13-bit instance, whose top group is only partly used, with
// random operands and the extreme values. Expected results come from the
// integer sum.
module tb_cla;
  timeunit 1ns; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [7:0]  a8, b8, s8;
  logic        c8, co8;
  logic [12:0] a13, b13, s13;
  logic        c13, co13;

  cla #(.W(8))  u8  (.a(a8),  .b(b8),  .cin(c8),  .sum(s8),  .cout(co8));
  cla #(.W(13)) u13 (.a(a13), .b(b13), .cin(c13), .sum(s13), .cout(co13));

  task automatic check13(logic [12:0] a, logic [12:0] b, logic c);
    int exp_v;
    a13 = a; b13 = b; c13 = c;
    #1;
    exp_v = int'(a) + int'(b) + int'(c);
    checks++;
    if ({co13, s13} != 14'(exp_v)) begin
      failures++;
      if (failures < 10) $display("FAIL 13: %0d + %0d + %0d = %0d", a, b, c, {co13, s13});
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
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++)
        for (int c = 0; c < 2; c++) begin
          a8 = 8'(a); b8 = 8'(b); c8 = c[0];
          #1;
          checks++;
          if ({co8, s8} != 9'(a + b + c)) begin
            failures++;
            if (failures < 10) $display("FAIL 8: %0d + %0d + %0d = %0d", a, b, c, {co8, s8});
          end
        end
    check13('1, '1, 1'b1);
    check13('1, 13'd1, 1'b0);
    check13('0, '0, 1'b0);
    for (int i = 0; i < 20000; i++)
      check13(13'($urandom), 13'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
