// tb_output_stage -- checks the output stage at its default size.
//
// Random 512-bit lines are loaded one per 128 clocks, some of them marked as
// not real (tag.valid low). For each real line the bus must carry exactly 16
// words on the 16 clocks after the step, word k holding pixels 32k..32k+31
// (pixel 32k in bit 0), with the frame markers on the first and last word of
// a frame; nothing may be sent for a line that is not real.
module tb_output_stage;
  timeunit 1ns; timeprecision 1ps;
  import fp_pkg::*;

  localparam int W = 512;
  localparam int NG = W / 32;

  logic clk = 0, rst_n = 0, adv = 0;
  logic [W-1:0] in_row = '0;
  row_tag_t in_tag = '0;
  logic out_valid, out_first, out_last;
  logic [31:0] out_data;

  int checks = 0, failures = 0;

  output_stage dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] row;
    row_tag_t t;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 12; n++) begin
      for (int k = 0; k < NG; k++) row[k*32 +: 32] = $urandom;
      t = '{valid: (n % 5 != 3), first: (n % 4 == 0), last: (n % 4 == 3), blk_first: 1'b0, blk_last: 1'b0};
      in_row <= row;
      in_tag <= t;
      adv <= 1;
      @(posedge clk);
      adv <= 0;
      in_row <= '0;
      for (int cyc = 0; cyc < 128 - 1; cyc++) begin
        @(negedge clk);
        if (t.valid && cyc < NG) begin
          chk(out_valid, $sformatf("line %0d word %0d missing", n, cyc));
          chk(out_data == row[cyc*32 +: 32], $sformatf("line %0d word %0d data", n, cyc));
          chk(out_first == (t.first && cyc == 0), "out_first");
          chk(out_last == (t.last && cyc == NG - 1), "out_last");
        end else
          chk(!out_valid, $sformatf("line %0d: bus busy at clock %0d", n, cyc));
        @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
