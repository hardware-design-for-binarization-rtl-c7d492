// thin_half -- one thinning sub-iteration over whole lines.
//
// Three one-bit line registers hold rows r+1, r and r-1 (newest first) and
// shift on every pipeline step. One tpc per column looks at the 3x3 window
// centred on row r; pixels outside the frame (columns -1 and WIDTH, the row
// above the first row and the row below the last one) count as 0. All pixels
// of row r are decided from the previous sub-iteration's image, which is the
// parallel form of the algorithm.
//
// Interface: `in_row`/`in_tag` are captured on `adv`; `out_row`/`out_tag`
// (row r after the sub-iteration) are combinational from the registers. A row
// captured at step n appears at the output after step n+1 and is captured
// by the next stage at step n+2.
//
// Paper: three register stages and a row of TPCs with a zero border. Own
// choice: the frame tag that blanks rows outside the frame.
module thin_half
  import fp_pkg::*;
#(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned SUB   = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             adv,
  input  logic [WIDTH-1:0] in_row,
  input  row_tag_t         in_tag,
  output logic [WIDTH-1:0] out_row,
  output row_tag_t         out_tag
);

  logic [WIDTH-1:0] r0, r1, r2;     // rows r+1, r, r-1
  row_tag_t         t0, t1;     // tags of rows r+1 and r
  logic [WIDTH-1:0] n_row, s_row;
  logic [WIDTH+1:0] north, centre, south;   // with a zero column on each side

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0 <= '0; r1 <= '0; r2 <= '0;
      t0 <= '0; t1 <= '0;
    end else if (adv) begin
      r0 <= in_row; r1 <= r0; r2 <= r1;
      t0 <= in_tag; t1 <= t0;
    end
  end

  assign n_row  = t1.first ? '0 : r2;
  assign s_row  = t1.last  ? '0 : r0;
  assign north  = {1'b0, n_row, 1'b0};
  assign centre = {1'b0, r1, 1'b0};
  assign south  = {1'b0, s_row, 1'b0};

  // padded index j = column c + 1
  for (genvar c = 0; c < WIDTH; c++) begin : g_tpc
    localparam int J = c + 1;
    logic [7:0] ring;
    assign ring = {north[J-1],    // P9 (i-1, j-1)
                   centre[J-1],   // P8 (i,   j-1)
                   south[J-1],    // P7 (i+1, j-1)
                   south[J],      // P6 (i+1, j)
                   south[J+1],    // P5 (i+1, j+1)
                   centre[J+1],   // P4 (i,   j+1)
                   north[J+1],    // P3 (i-1, j+1)
                   north[J]};     // P2 (i-1, j)
    tpc #(.SUB(SUB)) u_tpc (
      .p1   (centre[J]),
      .ring (ring),
      .p_out(out_row[c]),
      .del  ()
    );
  end

  assign out_tag = t1;

endmodule
