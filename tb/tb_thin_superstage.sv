// tb_thin_superstage -- checks one thinning iteration on whole rows.
//
// Three frames of 32x20 binary images (thick random blobs made by dilating
// random dots, and plain random pixels) are presented one row per step. The
// row leaving the super-stage must equal the reference result of
// sub-iteration I followed by sub-iteration II, four steps after the row
// was presented, with its tag.
module tb_thin_superstage;
  timeunit 1ns; timeprecision 1ps;
  import fp_pkg::*;
  import fp_ref_pkg::*;

  localparam int W = 32;
  localparam int H = 20;
  localparam int FRAMES = 3;
  localparam int LAT = 4;

  logic clk = 0, rst_n = 0, adv = 0;
  logic [W-1:0] in_row = '0, out_row;
  row_tag_t in_tag = '0, out_tag;

  int checks = 0, failures = 0;

  thin_superstage #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bin_a src [FRAMES];
  bin_a ref_t [FRAMES];

  initial begin
    int d1 = 0, d2 = 0, dd = 0;
    int total = FRAMES * H + LAT;
    for (int f = 0; f < FRAMES; f++) begin
      bin_a dots;
      dots = new[W * H];
      for (int i = 0; i < W * H; i++) dots[i] = (f == 2) ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 6) == 0);
      src[f] = (f == 2) ? dots : dilate(dots, W, H, dd);
      if (f == 0) src[f] = dilate(src[f], W, H, dd);
      ref_t[f] = thin(src[f], W, H, 1, d1, d2);
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < total; n++) begin
      int f, r;
      f = n / H; r = n % H;
      @(negedge clk);
      if (n >= LAT) begin
        int m, mf, mr;
        logic [W-1:0] e;
        m = n - LAT; mf = m / H; mr = m % H;
        for (int c = 0; c < W; c++) e[c] = ref_t[mf][mr * W + c];
        checks += 2;
        if (out_row != e) begin
          failures++;
          if (failures < 10) $display("FAIL: frame %0d row %0d got %b want %b", mf, mr, out_row, e);
        end
        if (!(out_tag.valid && out_tag.first == (mr == 0) && out_tag.last == (mr == H - 1))) failures++;
      end
      for (int c = 0; c < W; c++) in_row[c] <= (f < FRAMES) ? src[f][r * W + c] : 1'b0;
      in_tag <= '{valid: 1'b1, first: r == 0, last: r == H - 1, blk_first: 1'b0, blk_last: 1'b0};
      adv <= 1;
      @(posedge clk);
      adv <= 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    checks += 2;
    if (d1 == 0) begin failures++; $display("FAIL: no deletion in sub-iteration I"); end
    if (d2 == 0) begin failures++; $display("FAIL: no deletion in sub-iteration II"); end
    $display("deleted: I=%0d II=%0d", d1, d2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
