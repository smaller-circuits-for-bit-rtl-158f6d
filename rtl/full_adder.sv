// Full Adder: the sum of three bits of one layer, in five gates.
//
// a = x1 ^ x2, b = x2 ^ x3, c = a | b (1 unless all three bits are equal),
// w0 = a ^ x3 (parity), w1 = c ^ w0 (majority). Purely combinational. Used by
// the logarithmic-depth bit adder; pair_fa is the same circuit without its
// first gate, for bits kept in pairs.
module full_adder (
  input  logic x1,
  input  logic x2,
  input  logic x3,
  output logic w0,   // sum bit, weight 2^i
  output logic w1    // carry bit, weight 2^(i+1)
);
  logic a, b, c;
  assign a  = x1 ^ x2;
  assign b  = x2 ^ x3;
  assign c  = a | b;
  assign w0 = a ^ x3;
  assign w1 = c ^ w0;
endmodule
