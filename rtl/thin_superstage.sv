// thin_superstage -- one full thinning iteration: sub-iteration I then II.
//
// Two thin_half blocks in series: three line registers and a row of TPC1
// circuits (sub-iteration I), then three line registers and a row of TPC2
// circuits (sub-iteration II). The six line registers are the six pipeline
// stages of one iteration; the pipeline chains six of these super-stages.
//
// Interface: `in_row`/`in_tag` captured on `adv`; `out_row`/`out_tag`
// combinational, for capture by the next stage. A row captured at step n is
// captured by the following stage at step n+4.
//
// Paper: the structure and its six stages. Nothing here is this design's own
// beyond what thin_half adds.
module thin_superstage
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

  logic [WIDTH-1:0] mid_row;
  row_tag_t         mid_tag;

  thin_half #(.WIDTH(WIDTH), .SUB(1)) u_sub1 (
    .clk, .rst_n, .adv,
    .in_row (in_row),  .in_tag (in_tag),
    .out_row(mid_row), .out_tag(mid_tag)
  );

  thin_half #(.WIDTH(WIDTH), .SUB(2)) u_sub2 (
    .clk, .rst_n, .adv,
    .in_row (mid_row), .in_tag (mid_tag),
    .out_row(out_row), .out_tag(out_tag)
  );

endmodule
