// csa_layer -- one layer of a carry-save reduction tree.
//
// Reduces NIN words to NOUT words with the same total (NOUT < NIN <= 3/2
// NOUT): the first 3*(NIN-NOUT) words enter NIN-NOUT carry-save adders, the
// remaining words pass through unchanged after the adders' outputs.
// Purely combinational.
module csa_layer #(
  parameter int unsigned W    = 13,
  parameter int unsigned NIN  = 3,
  parameter int unsigned NOUT = 2
) (
  input  logic [NIN-1:0][W-1:0]  din,
  output logic [NOUT-1:0][W-1:0] dout
);
  localparam int unsigned NCSA = NIN - NOUT;

  initial assert (NOUT < NIN && 3 * NCSA <= NIN) else $error("csa_layer: bad NIN/NOUT");

  for (genvar k = 0; k < NCSA; k++) begin : g_csa
    csa #(.W(W)) u_csa (
      .a (din[3*k]),
      .b (din[3*k+1]),
      .c (din[3*k+2]),
      .s (dout[2*k]),
      .cy(dout[2*k+1])
    );
  end
  for (genvar k = 3 * NCSA; k < NIN; k++) begin : g_pass
    assign dout[k - NCSA] = din[k];
  end
endmodule
