// dilation -- 2x2 binary dilation between binarization and thinning.
//
// A pixel of the output is 1 if any pixel of its 2x2 window is 1. The window
// of column c in row r covers columns c and c+1 of rows r-1 and r. Row r is
// the comparator output arriving now; row r-1 is held in a one-bit line
// register (the binarizer's last stage in the paper's drawing) that is loaded
// on every pipeline step. An OR network combines the four pixels. Outside
// the frame (column WIDTH, the row above row 0) pixels count as 0.
//
// Interface: `in_row`/`in_tag` are combinational from the binarizer;
// `out_row`/`out_tag` are combinational too and are captured by the first
// thinning stage on `adv`. No added latency.
//
// Paper: the 2x2 window ("a pixel is set to 1 if one of its neighbours in a
// 2x2 window is 1") and an OR network after a one-bit register row. Own
// choice: which two columns and rows form the window (the figure does not
// print it) and the zero border.
module dilation
  import fp_pkg::*;
#(
  parameter int unsigned WIDTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             adv,
  input  logic [WIDTH-1:0] in_row,
  input  row_tag_t         in_tag,
  output logic [WIDTH-1:0] out_row,
  output row_tag_t         out_tag
);

  logic [WIDTH-1:0] prev_row;   // row r-1
  logic [WIDTH-1:0] above;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   prev_row <= '0;
    else if (adv) prev_row <= in_row;
  end

  assign above   = in_tag.first ? '0 : prev_row;
  // bit c+1 shifted down to bit c; column WIDTH is outside the frame
  assign out_row = in_row | (in_row >> 1) | above | (above >> 1);
  assign out_tag = in_tag;

endmodule
