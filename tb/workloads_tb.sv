// Runs the sizes at which the bit-addition circuits are evaluated:
//  * SUM_n (count the ones among n bits) for n = 511 and 2047, the largest
//    counters of the size table that still simulate quickly, against the
//    MDFA sizes 2263 and 9167 two-input gates (the smaller sizes 7, 31 and
//    127 are covered by the bit adder's own test);
//  * ADD_n, the addition of two n-bit numbers, for every n from 2 to 99,
//    each of which must come out at exactly 5n - 3 gates;
// Each instance is also checked functionally on random inputs.
module workloads_tb;
  localparam int NADD = 98;   // n = 2 .. 99
  localparam int C511  [1] = '{511};
  localparam int C2047 [1] = '{2047};

  int checks = 0, failures = 0;
  int c_add [NADD], f_add [NADD];
  logic d_add [NADD];
  int c_s1, f_s1, c_s2, f_s2;
  logic d_s1, d_s2;

  ba_probe #(.W(1), .CNT(C511),  .EXP_GATES(2263), .ITER(300))
    u_sum511  (.checks(c_s1), .failures(f_s1), .done(d_s1));
  ba_probe #(.W(1), .CNT(C2047), .EXP_GATES(9167), .ITER(100))
    u_sum2047 (.checks(c_s2), .failures(f_s2), .done(d_s2));

  for (genvar n = 2; n <= 99; n++) begin : g_add
    add_probe #(.N(n), .ITER(50)) u_add (.checks(c_add[n-2]), .failures(f_add[n-2]), .done(d_add[n-2]));
  end

  initial begin
    #1000000;
    $display("workloads_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (d_s1 && d_s2);
    for (int i = 0; i < NADD; i++) wait (d_add[i]);
    checks += c_s1 + c_s2;
    failures += f_s1 + f_s2;
    for (int i = 0; i < NADD; i++) begin
      checks += c_add[i];
      failures += f_add[i];
    end
    $display("workloads_tb: SUM_511 %0d/%0d, SUM_2047 %0d/%0d failures/checks", f_s1, c_s1, f_s2, c_s2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
