// tb_tpc -- checks both thinning processor circuits exhaustively.
//
// All 512 windows are applied to TPC1 (sub-iteration I) and TPC2
// (sub-iteration II). The expected decision counts the ring's ones (B) and
// 0->1 transitions (A) directly and applies 3 <= B <= 6, A = 1 and the
// sub-iteration's product conditions. Each circuit must delete for exactly
// 26 ring patterns, and TPC1 must keep the six run patterns the paper
// tabulates as excluded by its conditions c and d.
module tb_tpc;
  timeunit 1ns; timeprecision 1ps;
  import fp_ref_pkg::*;

  // rows of the paper's table, written P2 P3 ... P9 from left to right
  localparam logic [7:0] TABLE [6] = '{8'b11111000, 8'b00111110, 8'b11111100,
                                        8'b01111110, 8'b00111111, 8'b11111001};

  int checks = 0, failures = 0;
  logic p1;
  logic [7:0] ring;
  logic out1, del1, out2, del2;

  tpc #(.SUB(1)) u1 (.p1(p1), .ring(ring), .p_out(out1), .del(del1));
  tpc #(.SUB(2)) u2 (.p1(p1), .ring(ring), .p_out(out2), .del(del2));

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n1 = 0, n2 = 0;
    bit p[10];
    bit e1, e2;
    for (int w = 0; w < 512; w++) begin
      p1 = w[8];
      ring = w[7:0];
      #1;
      for (int i = 2; i <= 9; i++) p[i] = ring[i - 2];
      e1 = p1 && deletes(p, 1);
      e2 = p1 && deletes(p, 2);
      checks += 4;
      if (del1 != e1) begin failures++; $display("FAIL: TPC1 p1=%0d ring=%b del=%0d", p1, ring, del1); end
      if (del2 != e2) begin failures++; $display("FAIL: TPC2 p1=%0d ring=%b del=%0d", p1, ring, del2); end
      if (out1 != (p1 && !e1)) failures++;
      if (out2 != (p1 && !e2)) failures++;
      n1 += e1;
      n2 += e2;
    end
    // the six ring patterns the paper tabulates as removed by conditions c
    // and d (columns P2..P9): runs of 5 or 6 ones that TPC1 must keep
    foreach (TABLE[i]) begin
      p1 = 1'b1;
      for (int k = 0; k < 8; k++) ring[k] = TABLE[i][7 - k];
      #1;
      checks++;
      if (del1) begin failures++; $display("FAIL: TPC1 deletes tabulated pattern %b", TABLE[i]); end
    end
    checks += 2;
    if (n1 != 26) begin failures++; $display("FAIL: TPC1 deletes for %0d patterns", n1); end
    if (n2 != 26) begin failures++; $display("FAIL: TPC2 deletes for %0d patterns", n2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
