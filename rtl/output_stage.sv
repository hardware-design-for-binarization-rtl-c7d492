// output_stage -- last pipeline stage: sends a binary line out on the 32-bit
// bus.
//
// On each pipeline step the finished line (WIDTH one-bit pixels) is loaded
// into WIDTH one-bit buffers arranged in WIDTH/32 groups of 32 (16 for 512
// pixels). A 4-bit counter then walks a one-hot group select over the groups,
// one per clock, so the line leaves in 16 consecutive clocks; word k carries
// pixels 32k..32k+31 with pixel 32k in bit 0. The bus is idle for the rest of
// the 128-clock line period.
//
// Interface: `in_row`/`in_tag` captured on `adv`. `out_valid` is high for the
// WIDTH/32 clocks following the step if the line is a real one (tag.valid:
// the lines that fill the pipeline after reset are not sent); `out_first` marks the first word of a
// frame and `out_last` the last word of a frame.
//
// Paper: the 512 one-bit buffers, the 16 groups of 32, the 4-bit counter and
// the 16-output decoder, and "512 bits exit in 16 clocks". The paper also
// says the decoder is fed by the main clock divided by 16, which at one line
// per 128 clocks would not empty the buffers in time; this design follows
// "512 bits exit in 16 clocks" and steps the counter with the main clock.
// The frame markers and the bit order are this design's own.
module output_stage
  import fp_pkg::*;
#(
  parameter int unsigned WIDTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             adv,
  input  logic [WIDTH-1:0] in_row,
  input  row_tag_t         in_tag,
  output logic             out_valid,
  output logic [BUS_W-1:0] out_data,
  output logic             out_first,
  output logic             out_last
);

  localparam int unsigned NG = WIDTH / BUS_W;          // groups (16)
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  initial assert (WIDTH % BUS_W == 0) else $error("WIDTH must be a multiple of %0d", BUS_W);

  logic [NG-1:0][BUS_W-1:0] buffers;
  row_tag_t                 tag_q;
  logic [GW-1:0]            grp;
  logic                     busy;
  logic [NG-1:0]            sel;

  always_ff @(posedge clk) begin
    if (adv) buffers <= in_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      grp   <= '0;
      tag_q <= '0;
    end else if (adv) begin
      busy  <= in_tag.valid;
      grp   <= '0;
      tag_q <= in_tag;
    end else if (busy) begin
      grp  <= (grp == GW'(NG - 1)) ? '0 : grp + 1'b1;
      busy <= (grp != GW'(NG - 1));
    end
  end

  // 16-output decoder and the group buffers' enables onto the bus
  always_comb begin
    sel = '0;
    sel[grp] = busy;
    out_data = '0;
    for (int k = 0; k < NG; k++)
      if (sel[k]) out_data = buffers[k];
  end

  assign out_valid = busy;
  assign out_first = busy && tag_q.first && (grp == '0);
  assign out_last  = busy && tag_q.last  && (grp == GW'(NG - 1));

  // a new line may only arrive once the previous one has left
  property p_no_overrun;
    @(posedge clk) disable iff (!rst_n) adv |-> !busy || grp == GW'(NG - 1);
  endproperty
  assert property (p_no_overrun) else $error("output_stage: line overwritten while being sent");

endmodule
