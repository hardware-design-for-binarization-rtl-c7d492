// tb_binarizer -- checks the thresholding stage at a reduced width.
//
// Three frames of 64x32 pixels (two of the striped test image, one with a
// different brightness in every 15-column group) (four block-mean units, so the
// overlapped columns and the columns past the last whole block both occur)
// are presented one line per step, with idle clocks between steps. The
// binary row that leaves must equal the reference binarization (pixel
// greater than the floor mean of its 16x16 block), 18 steps after the line
// was presented, with the line's tag.
module tb_binarizer;
  timeunit 1ns; timeprecision 1ps;
  import fp_pkg::*;
  import fp_ref_pkg::*;

  localparam int W = 64;
  localparam int H = 32;
  localparam int FRAMES = 3;
  localparam int DELAY = 18;

  logic clk = 0, rst_n = 0, adv = 0;
  logic [W-1:0][7:0] line = '0;
  row_tag_t in_tag = '0, bin_tag;
  logic [W-1:0] bin_row;

  int checks = 0, failures = 0;

  binarizer #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pix_a img [FRAMES];
  bin_a ref_b [FRAMES];

  initial begin
    int nthr = 0;
    int total = FRAMES * H + DELAY;
    for (int f = 0; f < FRAMES; f++) begin
      img[f] = make_image(W, H, 5 * f + 2);
      // third frame: each 15-column group has its own brightness, so a
      // pixel compared with a neighbouring block's threshold shows
      if (f == 2)
        for (int i = 0; i < W * H; i++)
          img[f][i] = 8'(((i % W) / 15) * 50 + $urandom_range(0, 60));
      ref_b[f] = binarize(img[f], W, H, nthr);
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < total; n++) begin
      int f, r;
      f = n / H;
      r = n % H;
      @(negedge clk);
      // the row presented DELAY steps ago must be at the output now
      if (n >= DELAY) begin
        int m, mf, mr;
        logic [W-1:0] e;
        m = n - DELAY; mf = m / H; mr = m % H;
        for (int c = 0; c < W; c++) e[c] = ref_b[mf][mr * W + c];
        checks += 2;
        if (bin_row != e) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d row %0d got %h want %h", mf, mr, bin_row, e);
        end
        if (!(bin_tag.valid && bin_tag.first == (mr == 0) && bin_tag.last == (mr == H - 1))) failures++;
      end
      for (int c = 0; c < W; c++) line[c] <= (f < FRAMES) ? img[f][r * W + c] : 8'd0;
      in_tag <= '{valid: 1'b1, first: r == 0, last: r == H - 1,
                  blk_first: r % 16 == 0, blk_last: r % 16 == 15};
      adv <= 1;
      @(posedge clk);
      adv <= 0;
      repeat ($urandom_range(1, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
