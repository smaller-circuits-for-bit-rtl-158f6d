// Top level: the two bit-addition circuits the evaluation centres on.
//
// Unit 1 is an n-bit counter SUM_n: it outputs, in binary, how many of its
// SUM_N inputs are 1 (31 by default, the counter built in the usage example of
// the circuit generator). It is a single bit_adder with one column, i.e. the
// chain of pairing XORs, MDFA and Full Adder blocks of the MDFA-based counter.
// Unit 2 is an unsigned MULT_N x MULT_N multiplier (40 by default, the
// smallest size in the multiplier comparison), built as a Karatsuba multiplier
// whose sub-products below 20 bits are MDFA multipliers (partial products
// summed by bit_adder). Unit 3 counts the same SUM_N inputs with the
// logarithmic-depth construction (parallel Full/Half Adder stages and a
// Brent-Kung adder), trading a larger circuit for depth O(log n) instead of
// O(n); its output cnt_fast_out always equals cnt_out. The multiplier shares
// no signals with the counters. All units are purely combinational, with no
// clock or reset: outputs follow inputs after the gates' propagation delay.
module bitadd_top #(
  parameter int SUM_N  = 31,   // inputs of the counter
  parameter int MULT_N = 40    // operand width of the multiplier
) (
  input  logic [SUM_N-1:0]           cnt_in,   // bits to count
  output logic [$clog2(SUM_N+1)-1:0] cnt_out,  // number of ones in cnt_in
  output logic [$clog2(SUM_N+1)-1:0] cnt_fast_out, // the same, from the log-depth counter
  input  logic [MULT_N-1:0]          mul_a,    // multiplicand
  input  logic [MULT_N-1:0]          mul_b,    // multiplier
  output logic [2*MULT_N-1:0]        mul_p     // product mul_a * mul_b
);
  localparam int SUM_CNT [1] = '{SUM_N};

  bit_adder #(.W(1), .CNT(SUM_CNT)) u_count (.x(cnt_in), .y(cnt_out));

  log_depth_bit_adder #(.W(1), .CNT(SUM_CNT)) u_count_fast (.x(cnt_in), .y(cnt_fast_out));

  karatsuba_mult #(.N(MULT_N)) u_mult (.a(mul_a), .b(mul_b), .p(mul_p));
endmodule
