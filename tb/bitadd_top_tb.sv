// End-to-end test of bitadd_top at its default sizes (31-input counter,
// 40-bit Karatsuba/MDFA multiplier, log-depth 31-input counter). The
// two counters are driven with vectors of
// every population count 0..31 and random vectors; the multiplier with corner
// and random operands; outputs are compared with $countones and with the
// simulator's multiplication.
//
// The design is combinational, so its mechanisms are structural: the test
// counts, in the bit adders it can name, the blocks of each kind the
// construction placed (MDFA', MDFA, Half Adder on a pair, Full Adder on a
// pair, carry-pairing XOR), the Karatsuba splits and the MDFA base
// multipliers, and counts a failure for any kind that does not occur. It also
// counts how many counter outputs 0..31 were seen and requires all of them,
// and requires the multiplier's top product bit to have been 1 at least once.
module bitadd_top_tb;
  logic [30:0] cnt_in;
  logic [4:0]  cnt_out, cnt_fast_out;
  logic [39:0] mul_a, mul_b;
  logic [79:0] mul_p;
  int checks = 0, failures = 0;
  int seen_count [32];
  int top_bit_set = 0;

  bitadd_top dut (.cnt_in(cnt_in), .cnt_out(cnt_out), .cnt_fast_out(cnt_fast_out), .mul_a(mul_a), .mul_b(mul_b), .mul_p(mul_p));

  initial begin
    #1000000;
    $display("bitadd_top_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // Carry-pairing XORs that the bit adder's schedule places for the
  // partial-product shape of an n x n MDFA multiplier, worked out here from
  // the schedule rule (a layer with an odd input column that receives a
  // single carry pairs the two). The base multipliers sit too deep in the
  // recursion to be named from here, so their count is taken from this rule.
  function automatic int mult_cpairs(input int n);
    int k = 0, r = 0, s = 0, c, upre, cin, l;
    for (int j = 0; j < 2 * n + 16; j++) begin
      c    = (j < n) ? j + 1 : ((j < 2 * n - 1) ? 2 * n - 1 - j : 0);
      upre = c % 2;
      cin  = (j > 0 && r >= 2) ? 1 : 0;
      s   += (upre != 0 && cin != 0) ? 1 : 0;
      l    = 2 * (c / 2 + ((j > 0) ? k : 0) + ((upre != 0 && cin != 0) ? 1 : 0)) + (upre ^ cin);
      k    = l / 4;
      r    = l % 4;
    end
    return s;
  endfunction

  task automatic require(input string what, input int n);
    $display("bitadd_top_tb: %-38s %0d", what, n);
    checks++;
    if (n <= 0) begin
      failures++;
      $display("bitadd_top_tb: mechanism never occurred: %s", what);
    end
  endtask

  task automatic check_count(input logic [30:0] v);
    cnt_in = v;
    #1;
    checks++;
    if (int'(cnt_out) != $countones(v)) begin
      failures++;
      if (failures < 10) $display("bitadd_top_tb: count of %b gave %0d", v, cnt_out);
    end else seen_count[cnt_out]++;
    checks++;
    if (int'(cnt_fast_out) != $countones(v)) begin
      failures++;
      if (failures < 10) $display("bitadd_top_tb: log-depth count of %b gave %0d", v, cnt_fast_out);
    end
  endtask

  task automatic check_mult(input logic [39:0] x, input logic [39:0] y);
    logic [79:0] r;
    mul_a = x; mul_b = y;
    #1;
    r = 80'(x) * 80'(y);
    checks++;
    if (mul_p != r) begin
      failures++;
      if (failures < 10) $display("bitadd_top_tb: %h * %h gave %h, expected %h", x, y, mul_p, r);
    end
    if (mul_p[79]) top_bit_set++;
  endtask

  initial begin
    int n_mdfap, n_mdfa, n_ha, n_fa, n_cpair, n_split, n_base, n_values;
    logic [30:0] v;
    cnt_in = '0; mul_a = '0; mul_b = '0;
    foreach (seen_count[i]) seen_count[i] = 0;

    // Blocks placed in the instances below (the counter, the first-level
    // Karatsuba adders, and the second-level combining adder).
    n_mdfap = dut.u_count.N_MDFAP + dut.u_mult.g_split.u_comb.N_MDFAP
            + dut.u_mult.g_split.u_suma.N_MDFAP
            + dut.u_mult.g_split.u_lo.g_split.u_comb.N_MDFAP;
    n_mdfa  = dut.u_count.N_MDFA + dut.u_mult.g_split.u_comb.N_MDFA
            + dut.u_mult.g_split.u_suma.N_MDFA
            + dut.u_mult.g_split.u_lo.g_split.u_comb.N_MDFA;
    n_ha    = dut.u_count.N_HA + dut.u_mult.g_split.u_comb.N_HA
            + dut.u_mult.g_split.u_suma.N_HA
            + dut.u_mult.g_split.u_lo.g_split.u_comb.N_HA;
    n_fa    = dut.u_count.N_FA + dut.u_mult.g_split.u_comb.N_FA
            + dut.u_mult.g_split.u_suma.N_FA
            + dut.u_mult.g_split.u_lo.g_split.u_comb.N_FA;
    n_cpair = dut.u_count.N_CPAIR + dut.u_mult.g_split.u_comb.N_CPAIR
            + dut.u_mult.g_split.u_suma.N_CPAIR
            + dut.u_mult.g_split.u_lo.g_split.u_comb.N_CPAIR
            // nine base multipliers: 10,10,11 under each 20-bit half, 10,11,12 under the 21-bit middle
            + 2 * (2 * mult_cpairs(10) + mult_cpairs(11))
            + mult_cpairs(10) + mult_cpairs(11) + mult_cpairs(12);
    // 40 -> 20 -> 10: two splits on the path to u_lo.u_lo, whose 10-bit
    // halves are below the switch-over and so are MDFA multipliers.
    n_split = (dut.u_mult.H == 20 ? 1 : 0) + (dut.u_mult.g_split.u_lo.H == 10 ? 1 : 0);
    n_base  = (dut.u_mult.g_split.u_lo.H < dut.u_mult.BASE) ? 1 : 0;

    require("MDFA' blocks", n_mdfap);
    require("MDFA blocks", n_mdfa);
    require("half adders on a pair", n_ha);
    require("full adders on a pair", n_fa);
    require("carry-pairing XORs", n_cpair);
    require("Karatsuba splits on one path", n_split);
    require("MDFA base multipliers on one path", n_base);
    require("parallel adder stages of the log-depth counter", dut.u_count_fast.NST);

    // Counter: every population count, then random vectors.
    for (int k = 0; k <= 31; k++) begin
      v = '0;
      for (int i = 0; i < k; i++) v[i] = 1'b1;
      check_count(v);
      check_count(v << (31 - k));
    end
    for (int t = 0; t < 4000; t++) check_count(31'($urandom) & 31'($urandom | $urandom));

    // Multiplier.
    check_mult('0, '0);
    check_mult('1, '1);
    check_mult('1, 40'd1);
    check_mult(40'h80_0000_0000, 40'h80_0000_0001);
    for (int t = 0; t < 4000; t++)
      check_mult({$urandom, $urandom} >> ($urandom % 40), {$urandom, $urandom} >> ($urandom % 40));

    n_values = 0;
    foreach (seen_count[i]) if (seen_count[i] > 0) n_values++;
    checks++;
    if (n_values != 32) begin
      failures++;
      $display("bitadd_top_tb: only %0d of 32 counter values seen", n_values);
    end
    require("products with the top bit set", top_bit_set);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
