// Test helper: an n-bit adder ADD_n built as a bit adder whose n columns each
// hold two bits (bit i of both operands), checked on random operands and on
// its size, which must be 5n - 3 two-input gates (the known optimum for
// adding two n-bit numbers). Results are left in checks/failures.
module add_probe #(
  parameter int N    = 8,    // operand width n
  parameter int ITER = 200   // random vectors
) (
  output int   checks,
  output int   failures,
  output logic done
);
  typedef int cnt_t [N];
  function automatic cnt_t two_per_column();
    cnt_t c;
    for (int i = 0; i < N; i++) c[i] = 2;
    return c;
  endfunction
  localparam cnt_t CNT = two_per_column();

  ba_probe #(.W(N), .CNT(CNT), .EXP_GATES(5 * N - 3), .EXP_WOUT(N + 1), .ITER(ITER))
    u_probe (.checks(checks), .failures(failures), .done(done));
endmodule
