// Self-checking test of log_depth_bit_adder over several column shapes:
// equal-weight counters of 7, 31 and 127 bits (several Full Adder stages),
// two-number addition (no stage, straight to the Brent-Kung adder), an 8x8
// multiplier's partial products, a sparse shape with empty columns and a
// shape with a single tall column above short ones. Sums are checked against
// a direct weighted sum, output widths against the exact width of the
// largest sum. Three more shapes are the largest of the log-depth size
// table: a 320-input counter, a 160-bit two-number addition and the 10x10
// multiplier's partial products.
module log_depth_bit_adder_tb;
  localparam int NP = 11;
  int c [NP], f [NP];
  logic d [NP];
  int checks, failures;

  localparam int C0 [1] = '{7};
  localparam int C1 [1] = '{31};
  localparam int C2 [1] = '{127};
  localparam int C3 [8] = '{2,2,2,2,2,2,2,2};
  localparam int C4 [15] = '{1,2,3,4,5,6,7,8,7,6,5,4,3,2,1};
  localparam int C5 [7] = '{1,2,0,0,0,3,1};
  localparam int C6 [4] = '{1,1,9,1};
  localparam int C7 [3] = '{3,3,3};
  localparam int C8 [1] = '{320};
  typedef int add160_t [160];
  function automatic add160_t two_per_column();
    add160_t a;
    for (int i = 0; i < 160; i++) a[i] = 2;
    return a;
  endfunction
  localparam add160_t C9 = two_per_column();
  localparam int C10 [19] = '{1,2,3,4,5,6,7,8,9,10,9,8,7,6,5,4,3,2,1};
  ldba_probe #(.W(1),  .CNT(C0), .EXP_WOUT(3))  p0 (c[0], f[0], d[0]);
  ldba_probe #(.W(1),  .CNT(C1), .EXP_WOUT(5))  p1 (c[1], f[1], d[1]);
  ldba_probe #(.W(1),  .CNT(C2), .EXP_WOUT(7))  p2 (c[2], f[2], d[2]);
  ldba_probe #(.W(8),  .CNT(C3), .EXP_WOUT(9))  p3 (c[3], f[3], d[3]);
  ldba_probe #(.W(15), .CNT(C4), .EXP_WOUT(16)) p4 (c[4], f[4], d[4]);
  ldba_probe #(.W(7),  .CNT(C5), .EXP_WOUT(8))  p5 (c[5], f[5], d[5]);
  ldba_probe #(.W(4),  .CNT(C6), .EXP_WOUT(6))  p6 (c[6], f[6], d[6]);
  ldba_probe #(.W(3),  .CNT(C7), .EXP_WOUT(5))  p7 (c[7], f[7], d[7]);
  ldba_probe #(.W(1),   .CNT(C8),  .EXP_WOUT(9),   .ITER(300)) p8  (c[8],  f[8],  d[8]);
  ldba_probe #(.W(160), .CNT(C9),  .EXP_WOUT(161), .ITER(300)) p9  (c[9],  f[9],  d[9]);
  ldba_probe #(.W(19),  .CNT(C10), .EXP_WOUT(20),  .ITER(300)) p10 (c[10], f[10], d[10]);

  initial begin
    #1000000;
    $display("log_depth_bit_adder_tb: watchdog expired");
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
