// tb_fp_top_full -- end-to-end test of the pipeline at its default size.
//
// Two 512x512 frames of a striped, noisy test image is sent on the input bus,
// one word per clock, followed by 42 lines that push the last rows out. The
// pipeline is instantiated with its default parameters (512-pixel lines,
// 34 block-mean units). Otherwise it is the same test as tb_fp_top. Every
// output word is compared with the software reference (fp_ref_pkg). Also
// checked: the pipeline steps once per 128 clocks (one line of 512 pixels), a
// line leaves exactly 42 steps after it entered, its words come on
// consecutive clocks, and the frame markers. The test counts how often each
// mechanism acted (block thresholds latched, distinct thresholds, pixels set
// by dilation, pixels deleted by each sub-iteration, frame starts) and fails
// any that never did.
module tb_fp_top_full;
  timeunit 1ns; timeprecision 1ps;
  import fp_ref_pkg::*;

  localparam int W       = 512;
  localparam int H       = 512;
  localparam int FRAMES  = 2;
  localparam int LAT     = 42;
  localparam int WORDS   = W / 4;
  localparam int OWORDS  = W / 32;
  localparam int NLINES  = FRAMES * H + LAT;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0;
  logic [31:0] in_data = '0;
  logic        out_valid, out_first, out_last;
  logic [31:0] out_data;

  int checks = 0, failures = 0;

  fp_top dut (.*);

  always #5 clk = ~clk;

  pix_a img [FRAMES];
  bin_a expect_img [FRAMES];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (NLINES * WORDS + 2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int lines_done = 0, wi = 0, g = 0, adv_cnt = 0, last_adv = -1, cyc = 0;
  int frame_starts = 0, thr_latches = 0;
  int n_thr_distinct = 0, n_dil_set = 0;
  int n_del_sub[2] = '{0, 0};
  always @(posedge clk) begin
    cyc++;
    if (dut.adv) begin
      if (last_adv >= 0) check(cyc - last_adv == WORDS, $sformatf("step period %0d", cyc - last_adv));
      last_adv = cyc;
      adv_cnt++;
      if (dut.u_bin.mean_valid[0]) thr_latches++;
    end
    if (out_valid) begin
      if (g < FRAMES * H) begin
        int f, r;
        logic [31:0] exp_w;
        f = g / H;
        r = g % H;
        for (int b = 0; b < 32; b++) exp_w[b] = expect_img[f][r * W + wi * 32 + b];
        check(out_data == exp_w, $sformatf("frame %0d row %0d word %0d: got %h want %h", f, r, wi, out_data, exp_w));
        check(out_first == (r == 0 && wi == 0), "out_first");
        check(out_last == (r == H - 1 && wi == OWORDS - 1), "out_last");
        if (out_first) frame_starts++;
        if (wi == 0) check(lines_done == g + LAT + 1, $sformatf("latency: row %0d out after %0d lines", g, lines_done));
      end else
        check(0, "extra output row");
      if (wi == OWORDS - 1) begin wi = 0; g++; end else wi++;
    end else
      check(wi == 0, "output words not on consecutive clocks");
    if (in_valid && dut.u_load.word_cnt == 7'(WORDS - 1)) lines_done++;
  end

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      bin_a b, d;
      img[f] = make_image(W, H, f * 3 + 1);
      b = binarize(img[f], W, H, n_thr_distinct);
      d = dilate(b, W, H, n_dil_set);
      expect_img[f] = thin(d, W, H, 6, n_del_sub[0], n_del_sub[1]);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < NLINES; n++) begin
      for (int k = 0; k < WORDS; k++) begin
        logic [31:0] wd;
        wd = '0;
        if (n < FRAMES * H)
          for (int j = 0; j < 4; j++) wd[j*8 +: 8] = img[n / H][(n % H) * W + 4 * k + j];
        in_valid <= 1;
        in_data  <= wd;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (WORDS + 10) @(posedge clk);
    check(g == FRAMES * H, $sformatf("rows out %0d", g));
    check(adv_cnt == NLINES, "one step per line");
    $display("mechanisms: thr_latches=%0d distinct_thr=%0d dil_set=%0d del_I=%0d del_II=%0d frames=%0d",
             thr_latches, n_thr_distinct, n_dil_set, n_del_sub[0], n_del_sub[1], frame_starts);
    check(thr_latches > 0, "block threshold latched");
    check(n_thr_distinct > 1, "adaptive (distinct) thresholds");
    check(n_dil_set > 0, "dilation set a pixel");
    check(n_del_sub[0] > 0, "sub-iteration I deleted a pixel");
    check(n_del_sub[1] > 0, "sub-iteration II deleted a pixel");
    check(frame_starts == FRAMES, "frame starts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
