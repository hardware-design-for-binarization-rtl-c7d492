// tpc -- thinning processor circuit: one pixel of one thinning sub-iteration.
//
// The 3x3 window is given as the centre P1 and the ring P2..P9 (P2 above,
// then clockwise: P3 above-right, P4 right, P5 below-right, P6 below, P7
// below-left, P8 left, P9 above-left). A set centre pixel is deleted when
//   a) 3 <= B(P1) <= 6   (B = number of ones in the ring),
//   b) A(P1) = 1         (one 0->1 transition around the ring),
//   c) P2&P4&P6 = 0 and d) P4&P6&P8 = 0      in sub-iteration I (SUB = 1),
//   c') P2&P4&P8 = 0 and d') P2&P6&P8 = 0    in sub-iteration II (SUB = 2).
// Conditions a and b together mean the ones form one unbroken run of 3..6
// pixels around the ring: 4 run lengths times 8 start positions give 32 ring
// patterns. c and d rule out 6 of them, leaving 26 minterms, and the circuit
// is the OR of those 26 minterms of the ring. The minterm list is computed at
// elaboration by enumerating the runs, so the logic is a 256-entry constant
// indexed by the ring.
//
// Combinational. `p_out` is the centre pixel after the sub-iteration.
//
// Paper: the conditions (with the lower bound of a raised from 2 to 3, the
// paper's modification of the Zhang-Suen rule) and the 26-minterm
// realisation. Own choice: computing the minterms by enumeration.
module tpc #(
  parameter int unsigned SUB = 1
) (
  input  logic       p1,
  input  logic [7:0] ring,   // ring[i] = P(i+2): ring[0] = P2 ... ring[7] = P9
  output logic       p_out,
  output logic       del
);

  function automatic logic [255:0] minterms(int unsigned sub);
    logic [255:0] t;
    logic [7:0]   m;
    logic         c1, c2;
    t = '0;
    for (int len = 3; len <= 6; len++) begin
      for (int st = 0; st < 8; st++) begin
        m = '0;
        for (int i = 0; i < len; i++) m[(st + i) % 8] = 1'b1;
        // m[0]=P2 m[1]=P3 m[2]=P4 m[3]=P5 m[4]=P6 m[5]=P7 m[6]=P8 m[7]=P9
        if (sub == 1) begin
          c1 = m[0] & m[2] & m[4];   // P2 P4 P6
          c2 = m[2] & m[4] & m[6];   // P4 P6 P8
        end else begin
          c1 = m[0] & m[2] & m[6];   // P2 P4 P8
          c2 = m[0] & m[4] & m[6];   // P2 P6 P8
        end
        if (!c1 && !c2) t[m] = 1'b1;
      end
    end
    return t;
  endfunction

  localparam logic [255:0] DEL_TABLE = minterms(SUB);

  initial assert (SUB == 1 || SUB == 2) else $error("SUB must be 1 or 2");

  assign del   = p1 & DEL_TABLE[ring];
  assign p_out = p1 & ~DEL_TABLE[ring];

endmodule
