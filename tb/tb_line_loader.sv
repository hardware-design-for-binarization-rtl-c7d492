// tb_line_loader -- checks the input stage at its default size.
//
// Twenty 512-pixel lines of random pixels are sent, four pixels per word,
// with occasional idle clocks (in_valid low) inside some lines. Checked: the
// step pulse comes exactly one clock after each line's last word and only
// then (128 words per step), the assembled line matches what was sent, and
// the row tag marks frame row 0 and the first and last rows of each 16-row
// band.
module tb_line_loader;
  timeunit 1ns; timeprecision 1ps;
  import fp_pkg::*;

  localparam int W = 512;
  localparam int WORDS = W / 4;
  localparam int NL = 20;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] in_data = '0;
  logic [W-1:0][7:0] line;
  row_tag_t tag;
  logic adv;

  int checks = 0, failures = 0;

  line_loader dut (.*);

  always #5 clk = ~clk;

  logic [7:0] sent [NL][W];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // adv must follow the clock that took a line's last word, and nothing else
  int words_taken = 0, steps = 0;
  always @(posedge clk) begin
    if (rst_n && adv) begin
      int n;
      bit ok;
      n = steps;
      steps++;
      chk(words_taken == (n + 1) * WORDS, $sformatf("step %0d after %0d words", n, words_taken));
      ok = 1;
      for (int p = 0; p < W; p++) if (line[p] != sent[n][p]) ok = 0;
      chk(ok, $sformatf("line %0d contents", n));
      chk(tag.valid && tag.first == (n == 0) && tag.last == 0 &&
          tag.blk_first == (n % 16 == 0) && tag.blk_last == (n % 16 == 15),
          $sformatf("line %0d tag %b", n, tag));
    end
    if (in_valid) words_taken++;
  end

  initial begin
    for (int n = 0; n < NL; n++)
      for (int p = 0; p < W; p++) sent[n][p] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NL; n++)
      for (int k = 0; k < WORDS; k++) begin
        if (n % 3 == 1 && k % 37 == 5) begin
          in_valid <= 0;
          repeat (2) @(posedge clk);
        end
        in_valid <= 1;
        in_data  <= {sent[n][4*k+3], sent[n][4*k+2], sent[n][4*k+1], sent[n][4*k]};
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    chk(steps == NL, $sformatf("%0d steps for %0d lines", steps, NL));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
