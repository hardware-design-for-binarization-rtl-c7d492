// fp_pkg -- constants and types shared by the fingerprint binarization and
// thinning pipeline.
//
// The pipeline moves one image line per "pipeline step". Every line carries a
// small tag that says whether it is a real line and where it sits in the frame (first/last row) and in its
// band of 16-row thresholding blocks. The tag is this design's own addition:
// it lets the block-mean units know when a block starts and ends and lets the
// 3x3 thinning windows treat rows outside the frame as background, so
// consecutive frames do not bleed into one another.
//
// The fixed numbers are the ones the paper gives: 8-bit pixels, a 32-bit
// input and output bus, 16x16 thresholding blocks with one overlapped pixel
// between horizontal neighbours, and six thinning iterations.
package fp_pkg;

  localparam int unsigned PIX_W      = 8;   // bits per gray-scale pixel
  localparam int unsigned BUS_W      = 32;  // input and output bus width
  localparam int unsigned BLK        = 16;  // thresholding block is BLK x BLK
  localparam int unsigned OVERLAP    = 1;   // pixels shared by neighbouring blocks
  localparam int unsigned STRIDE     = BLK - OVERLAP;
  localparam int unsigned SUM_W      = 13;  // width of the 17-input adder result
  localparam int unsigned THIN_ITERS = 6;   // thinning super-stages

  // Position of a line in the frame and in its band of thresholding blocks.
  typedef struct packed {
    logic valid;      // a real input line (not reset contents)
    logic first;      // row 0 of the frame
    logic last;       // last row of the frame
    logic blk_first;  // first row of a 16-row block band
    logic blk_last;   // last row of a 16-row block band
  } row_tag_t;

  // Number of block-mean units for a line of `width` pixels: blocks of BLK
  // pixels that start every STRIDE pixels and lie wholly inside the line.
  function automatic int unsigned num_blocks(int unsigned width);
    return (width - BLK) / STRIDE + 1;
  endfunction

  // Block whose threshold a pixel in column `col` is compared with.
  function automatic int unsigned block_of(int unsigned col, int unsigned width);
    int unsigned b;
    b = col / STRIDE;
    if (b > num_blocks(width) - 1) b = num_blocks(width) - 1;
    return b;
  endfunction

endpackage
