// Self-checking test of bit_adder over several column shapes: equal-weight
// counters (SUM_n), two-number addition (ADD_n), the shape of an 8x8
// multiplier's partial products, a sparse shape with an empty column, and the
// worst-case shape 0,0,0,0,1,1,2,2,... Sums are checked against a direct
// weighted sum; gate counts against the construction's published sizes
// (SUM_7 = 19, SUM_16 = 59, SUM_31 = 119, SUM_127 = 543, ADD_n = 5n - 3).
module bit_adder_tb;
  localparam int NP = 11;
  int c [NP], f [NP];
  logic d [NP];
  int checks, failures;

  localparam int C0 [1] = '{7};
  ba_probe #(.W(1), .CNT(C0),   .EXP_GATES(19),  .EXP_WOUT(3)) p0 (c[0], f[0], d[0]);
  localparam int C1 [1] = '{16};
  ba_probe #(.W(1), .CNT(C1),  .EXP_GATES(59),  .EXP_WOUT(5)) p1 (c[1], f[1], d[1]);
  localparam int C2 [1] = '{31};
  ba_probe #(.W(1), .CNT(C2),  .EXP_GATES(119), .EXP_WOUT(5)) p2 (c[2], f[2], d[2]);
  localparam int C3 [1] = '{127};
  ba_probe #(.W(1), .CNT(C3), .EXP_GATES(543), .EXP_WOUT(7)) p3 (c[3], f[3], d[3]);
  // ADD_8: two 8-bit numbers, 5n-3 = 37 gates
  localparam int C4 [8] = '{2,2,2,2,2,2,2,2};
  ba_probe #(.W(8), .CNT(C4), .EXP_GATES(37), .EXP_WOUT(9)) p4 (c[4], f[4], d[4]);
  // partial products of an 8x8 multiplier
  localparam int C5 [15] = '{1,2,3,4,5,6,7,8,7,6,5,4,3,2,1};
  ba_probe #(.W(15), .CNT(C5), .EXP_WOUT(16)) p5 (c[5], f[5], d[5]);
  // significances 0,1,1,5,5,5,6: seven bits flattened to layers 0,1,2,5,6,7
  localparam int C6 [7] = '{1,2,0,0,0,3,1};
  ba_probe #(.W(7), .CNT(C6), .EXP_WOUT(8)) p6 (c[6], f[6], d[6]);
  // 0,0,0,0,1,1,2,2,...,8,8: n/2 MDFA' blocks after pairing
  localparam int C7 [9] = '{4,2,2,2,2,2,2,2,2};
  ba_probe #(.W(9), .CNT(C7)) p7 (c[7], f[7], d[7]);
  // single bit on top of a number (increment shape), one column of each case l mod 4
  localparam int C8 [6] = '{2,1,1,1,1,1};
  ba_probe #(.W(6), .CNT(C8), .EXP_WOUT(7)) p8 (c[8], f[8], d[8]);
  localparam int C9 [4] = '{5,6,7,8};
  ba_probe #(.W(4), .CNT(C9)) p9 (c[9], f[9], d[9]);
  localparam int C10 [3] = '{2,0,3};
  ba_probe #(.W(3), .CNT(C10), .EXP_WOUT(4)) p10 (c[10], f[10], d[10]);

  initial begin
    #1000000;
    $display("bit_adder_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    #2;
    for (int i = 0; i < NP; i++) wait (d[i] === 1'b1);
    checks = 0; failures = 0;
    for (int i = 0; i < NP; i++) begin
      checks += c[i];
      failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
