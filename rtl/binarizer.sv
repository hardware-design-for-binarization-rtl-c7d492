// binarizer -- local adaptive thresholding with 16x16 blocks.
//
// The line from the first stage is cut into NB = (WIDTH-16)/15 + 1 column
// groups of 16 pixels that start every 15 pixels, so neighbouring groups share
// one pixel (34 groups for 512 pixels). Each group feeds its own mean value
// calculator unit (mvcu), which sums the block one row per pipeline step.
// When a band of 16 rows is complete, every unit's mean is latched into that
// group's 8-bit threshold register, which therefore changes once every 16
// steps. Meanwhile the lines themselves wait in a chain of DELAY = 18 line
// registers, so that rows 0..15 of the band reach the comparators exactly
// during the 16 steps the band's thresholds are held. A comparator gives 1
// where the pixel is greater than its threshold (g = 1 if f > T).
//
// Each pixel is compared with the threshold of the group it belongs to when
// the line is split every 15 pixels (column c uses group min(c/15, NB-1));
// the shared pixel thus goes to the group on its right, and the columns past
// the last whole group (column 511 at the default size) use the last group.
//
// Interface: `line`/`in_tag` from the first stage, captured on `adv`.
// `bin_row`/`bin_tag` are combinational: the binary version of the line in
// the last delay register, valid for capture on the next `adv`. A row leaves
// DELAY + 1 steps after it entered (from the first stage's register).
//
// Paper: block size, one overlapped pixel, 34 MVCUs, threshold registers
// clocked once per 16 pipeline steps, comparators, a row delay chain. Own
// choices: the chain length (18 registers, where the paper's figures draw 14
// or 15 stages: their timing is not given and 18 is what the MVCU latency
// needs), which threshold a shared pixel uses, and blocks that do not overlap
// vertically (the threshold register changes every 16 rows).
module binarizer
  import fp_pkg::*;
#(
  parameter int unsigned WIDTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        adv,
  input  logic [WIDTH-1:0][PIX_W-1:0] line,
  input  row_tag_t                    in_tag,
  output logic [WIDTH-1:0]            bin_row,
  output row_tag_t                    bin_tag
);

  localparam int unsigned NB    = num_blocks(WIDTH);
  localparam int unsigned DELAY = BLK + 2;

  logic [NB-1:0][PIX_W-1:0] mean, thr;
  logic [NB-1:0]            mean_valid;

  for (genvar b = 0; b < NB; b++) begin : g_mvcu
    mvcu u_mvcu (
      .clk       (clk),
      .rst_n     (rst_n),
      .adv       (adv),
      .pix       (line[b*STRIDE +: BLK]),
      .row_first (in_tag.blk_first),
      .row_last  (in_tag.blk_last),
      .mean      (mean[b]),
      .mean_valid(mean_valid[b])
    );

    // threshold register: loaded once per band of 16 rows
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                       thr[b] <= '0;
      else if (adv && mean_valid[b])    thr[b] <= mean[b];
    end
  end

  // row delay chain (the pipeline stages beside the MVCUs)
  logic [WIDTH-1:0][PIX_W-1:0] dly     [DELAY];
  row_tag_t                    dly_tag [DELAY];

  always_ff @(posedge clk) begin
    if (adv) begin
      dly[0] <= line;
      for (int i = 1; i < DELAY; i++) dly[i] <= dly[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DELAY; i++) dly_tag[i] <= '0;
    end else if (adv) begin
      dly_tag[0] <= in_tag;
      for (int i = 1; i < DELAY; i++) dly_tag[i] <= dly_tag[i-1];
    end
  end

  // comparators
  for (genvar c = 0; c < WIDTH; c++) begin : g_cmp
    localparam int unsigned B = block_of(c, WIDTH);
    assign bin_row[c] = dly[DELAY-1][c] > thr[B];
  end
  assign bin_tag = dly_tag[DELAY-1];

endmodule
