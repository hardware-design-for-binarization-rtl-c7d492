// fp_ref_pkg -- software reference of the pipeline, for the testbenches.
//
// Works on whole frames held in dynamic arrays (index r*W + c) and follows
// the algorithm rather than the hardware: block means by direct summation,
// comparison, 2x2 dilation, and thinning where the deletion test counts the
// ring's ones (B) and 0->1 transitions (A) and checks the sub-iteration's
// two product conditions, all pixels of a sub-iteration decided from the
// previous image. Pixels outside the frame are 0. It also counts how often
// each mechanism acted (through ref arguments), so a testbench can show its stimulus exercised it.
package fp_ref_pkg;

  localparam int BLK = 16;
  localparam int STRIDE = 15;

  typedef byte unsigned pix_a[];
  typedef bit           bin_a[];


  function automatic int num_blocks(int w);
    return (w - BLK) / STRIDE + 1;
  endfunction

  function automatic int block_of(int c, int w);
    int b = c / STRIDE;
    return (b > num_blocks(w) - 1) ? num_blocks(w) - 1 : b;
  endfunction

  // mean of the block at band `band`, column group `b`
  function automatic int block_mean(const ref pix_a img, input int w, int band, int b);
    int s = 0;
    for (int r = 0; r < BLK; r++)
      for (int c = 0; c < BLK; c++)
        s += img[(band * BLK + r) * w + b * STRIDE + c];
    return s / 256;
  endfunction

  function automatic bin_a binarize(const ref pix_a img, input int w, int h,
                                          ref int n_thr_distinct);
    bin_a o = new[w * h];
    int   nb = num_blocks(w);
    int   thr[];
    bit   seen[256];
    thr = new[nb];
    for (int band = 0; band < h / BLK; band++) begin
      for (int b = 0; b < nb; b++) begin
        thr[b] = block_mean(img, w, band, b);
        if (!seen[thr[b]]) begin seen[thr[b]] = 1; n_thr_distinct++; end
      end
      for (int r = band * BLK; r < band * BLK + BLK; r++)
        for (int c = 0; c < w; c++)
          o[r * w + c] = int'(img[r * w + c]) > thr[block_of(c, w)];
    end
    return o;
  endfunction

  function automatic bit at(const ref bin_a im, input int w, int h, int r, int c);
    if (r < 0 || r >= h || c < 0 || c >= w) return 0;
    return im[r * w + c];
  endfunction

  function automatic bin_a dilate(const ref bin_a im, input int w, int h, ref int n_dil_set);
    bin_a o = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        o[r * w + c] = at(im, w, h, r, c) | at(im, w, h, r, c + 1)
                     | at(im, w, h, r - 1, c) | at(im, w, h, r - 1, c + 1);
        if (o[r * w + c] && !im[r * w + c]) n_dil_set++;
      end
    return o;
  endfunction

  // deletion test of one pixel; p[2..9] as in the usual 3x3 numbering
  function automatic bit deletes(bit p[10], int sub);
    int bsum = 0, atr = 0;
    for (int i = 2; i <= 9; i++) bsum += p[i];
    for (int i = 2; i <= 9; i++) atr += (p[i] == 0 && p[(i == 9) ? 2 : i + 1] == 1);
    if (!(bsum >= 3 && bsum <= 6 && atr == 1)) return 0;
    if (sub == 1) return !(p[2] & p[4] & p[6]) && !(p[4] & p[6] & p[8]);
    else          return !(p[2] & p[4] & p[8]) && !(p[2] & p[6] & p[8]);
  endfunction

  function automatic bin_a thin_step(const ref bin_a im, input int w, int h, int sub,
                                           ref int n_del);
    bin_a o = new[w * h];
    bit   p[10];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        o[r * w + c] = im[r * w + c];
        if (im[r * w + c]) begin
          p[2] = at(im, w, h, r - 1, c);     p[3] = at(im, w, h, r - 1, c + 1);
          p[4] = at(im, w, h, r, c + 1);     p[5] = at(im, w, h, r + 1, c + 1);
          p[6] = at(im, w, h, r + 1, c);     p[7] = at(im, w, h, r + 1, c - 1);
          p[8] = at(im, w, h, r, c - 1);     p[9] = at(im, w, h, r - 1, c - 1);
          if (deletes(p, sub)) begin
            o[r * w + c] = 0;
            n_del++;
          end
        end
      end
    return o;
  endfunction

  function automatic bin_a thin(const ref bin_a im, input int w, int h, int iters,
                                      ref int n_del1, ref int n_del2);
    bin_a a = im;
    for (int i = 0; i < iters; i++) begin
      a = thin_step(a, w, h, 1, n_del1);
      a = thin_step(a, w, h, 2, n_del2);
    end
    return a;
  endfunction

  // a ridge-like test image: slanted stripes of varying period, a brightness
  // gradient across the frame, and noise
  function automatic pix_a make_image(int w, int h, int seed);
    pix_a img = new[w * h];
    int   v, period;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        period = 6 + ((r / 8 + seed) % 4) * 2;
        v = (((c + r / 2 + seed) % period) < period / 2) ? 70 : 170;
        v += (c * 60) / w - (r * 40) / h;
        v += int'($urandom_range(0, 40)) - 20;
        if (v < 0) v = 0;
        if (v > 255) v = 255;
        img[r * w + c] = byte'(v);
      end
    return img;
  endfunction

endpackage
