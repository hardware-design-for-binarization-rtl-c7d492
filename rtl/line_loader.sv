// line_loader -- first pipeline stage: receives the gray-scale image from the
// 32-bit input bus and assembles one full line of WIDTH 8-bit pixels.
//
// Each accepted bus word carries four pixels. A word counter (7 bits for the
// default 512-pixel line) drives a one-hot decoder whose output k enables the
// four pixel registers 4k..4k+3; bits [7:0] of the word go to register 4k,
// [15:8] to 4k+1, [23:16] to 4k+2 and [31:24] to 4k+3. After the last word of
// a line the stage raises `adv` for one clock: this is the pipeline step, the
// main clock divided by 128 when words arrive every clock. All later stages
// capture on that step, while this stage already starts loading the next
// line (the registers they read are overwritten only after the same edge).
//
// Interface: `in_valid`/`in_data` (a word is taken on every clock `in_valid`
// is high, there is no back-pressure); `line` and `tag` hold the finished
// line from the clock after its last word until the next line completes.
// Rows are counted modulo HEIGHT to build the frame/block tag.
//
// Paper: the bus width, the 4-pixel split, counter, decoder and divide-by-128
// pipeline clock. Own choices: a clock enable (`adv`) instead of a divided
// clock, the `in_valid` strobe, the byte order D1-8 = bits [7:0], and the row
// tag.
module line_loader
  import fp_pkg::*;
#(
  parameter int unsigned WIDTH  = 512,
  parameter int unsigned HEIGHT = 512
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [BUS_W-1:0]              in_data,
  output logic [WIDTH-1:0][PIX_W-1:0]   line,
  output row_tag_t                      tag,
  output logic                          adv
);

  localparam int unsigned PPW   = BUS_W / PIX_W;      // pixels per word (4)
  localparam int unsigned WORDS = WIDTH / PPW;        // words per line (128)
  localparam int unsigned CW    = $clog2(WORDS);      // counter width (7)
  localparam int unsigned RW    = $clog2(HEIGHT);

  initial begin
    assert (WIDTH % PPW == 0) else $error("WIDTH must be a multiple of %0d", PPW);
    assert (HEIGHT % BLK == 0) else $error("HEIGHT must be a multiple of %0d", BLK);
  end

  logic [CW-1:0]    word_cnt;
  logic [WORDS-1:0] dec;        // one-hot load enables, the paper's decoder
  logic [RW-1:0]    row_cnt;    // row being loaded
  logic             line_done;

  always_comb begin
    dec = '0;
    dec[word_cnt] = 1'b1;
  end

  assign line_done = in_valid && (word_cnt == CW'(WORDS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_cnt <= '0;
      row_cnt  <= '0;
      adv      <= 1'b0;
      tag      <= '0;
    end else begin
      adv <= line_done;
      if (in_valid) word_cnt <= (word_cnt == CW'(WORDS - 1)) ? '0 : word_cnt + 1'b1;
      if (line_done) begin
        tag.valid     <= 1'b1;
        tag.first     <= (row_cnt == '0);
        tag.last      <= (row_cnt == RW'(HEIGHT - 1));
        tag.blk_first <= (row_cnt % RW'(BLK) == '0);
        tag.blk_last  <= (row_cnt % RW'(BLK) == RW'(BLK - 1));
        row_cnt       <= (row_cnt == RW'(HEIGHT - 1)) ? '0 : row_cnt + 1'b1;
      end
    end
  end

  // Pixel registers: no reset, every one is written before it is used.
  for (genvar k = 0; k < WORDS; k++) begin : g_word
    for (genvar j = 0; j < PPW; j++) begin : g_pix
      always_ff @(posedge clk)
        if (in_valid && dec[k]) line[k*PPW + j] <= in_data[j*PIX_W +: PIX_W];
    end
  end

endmodule
