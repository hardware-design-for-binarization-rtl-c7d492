// fp_top -- fingerprint binarization, dilation and thinning pipeline.
//
// Gray-scale lines enter four pixels per clock on a 32-bit bus. Once a line
// is complete (128 clocks at 512 pixels) the whole pipeline takes one step:
//   line_loader      assembles the line (pipeline stage 1);
//   binarizer        block means of 16x16 blocks and comparison (stages 2..19);
//   dilation         2x2 dilation of the binary rows;
//   6 x thin_superstage  six thinning iterations, each two sub-iterations
//                        of three line registers and a row of TPCs;
//   output_stage     sends the thinned line out, 32 pixels per clock.
// A line taken from stage 1 at pipeline step n leaves on the output bus
// during the 16 clocks after step n + 42 (18 steps of row delay for the
// thresholding, none for the dilation, 4 for each of the six thinning
// iterations), so a frame must be followed by 42 lines of any data to push
// its last rows out. Rows are counted modulo HEIGHT:
// the first line after reset is row 0 of a frame.
//
// Interface: `in_valid`/`in_data` (no back-pressure; the line rate is set by
// the source), `out_valid`/`out_data` with `out_first`/`out_last` marking the
// first and last word of a frame. A pixel is 1 where the gray value is above
// its block mean, before dilation and thinning.
//
// Paper: the order of the stages, the widths, the block size, 34 MVCUs, six
// thinning iterations. Own choices are listed in each block.
module fp_top
  import fp_pkg::*;
#(
  parameter int unsigned WIDTH  = 512,
  parameter int unsigned HEIGHT = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [BUS_W-1:0] in_data,
  output logic             out_valid,
  output logic [BUS_W-1:0] out_data,
  output logic             out_first,
  output logic             out_last
);

  logic                        adv;
  logic [WIDTH-1:0][PIX_W-1:0] line;
  row_tag_t                    line_tag;

  line_loader #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_load (
    .clk, .rst_n, .in_valid, .in_data,
    .line(line), .tag(line_tag), .adv(adv)
  );

  logic [WIDTH-1:0] bin_row, dil_row;
  row_tag_t         bin_tag, dil_tag;

  binarizer #(.WIDTH(WIDTH)) u_bin (
    .clk, .rst_n, .adv,
    .line(line), .in_tag(line_tag),
    .bin_row(bin_row), .bin_tag(bin_tag)
  );

  dilation #(.WIDTH(WIDTH)) u_dil (
    .clk, .rst_n, .adv,
    .in_row(bin_row), .in_tag(bin_tag),
    .out_row(dil_row), .out_tag(dil_tag)
  );

  logic [WIDTH-1:0] th_row [THIN_ITERS+1];
  row_tag_t         th_tag [THIN_ITERS+1];

  assign th_row[0] = dil_row;
  assign th_tag[0] = dil_tag;

  for (genvar i = 0; i < THIN_ITERS; i++) begin : g_thin
    thin_superstage #(.WIDTH(WIDTH)) u_ss (
      .clk, .rst_n, .adv,
      .in_row (th_row[i]),   .in_tag (th_tag[i]),
      .out_row(th_row[i+1]), .out_tag(th_tag[i+1])
    );
  end

  output_stage #(.WIDTH(WIDTH)) u_out (
    .clk, .rst_n, .adv,
    .in_row(th_row[THIN_ITERS]), .in_tag(th_tag[THIN_ITERS]),
    .out_valid, .out_data, .out_first, .out_last
  );

endmodule
