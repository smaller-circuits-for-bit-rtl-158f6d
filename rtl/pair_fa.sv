// Full Adder on a pair plus one unpaired bit.
//
// Adds three bits x1, x2, x3 of one layer where x1 and x2 arrive as a pair, so
// x1 ^ x2 is already computed. The gates are those of the five-gate Full Adder
// (a = x1^x2, b = x2^x3, c = a|b, w0 = a^x3, w1 = c^w0) with the first gate
// removed, leaving four. c is 1 unless all three bits are equal, so c ^ w0 is
// the majority. Purely combinational.
module pair_fa (
  input  logic x12,  // x1 ^ x2 (parity of the pair)
  input  logic x2,   // x2 (the pair's stored bit)
  input  logic x3,   // unpaired bit
  output logic w0,   // sum bit, weight 2^i
  output logic w1    // carry bit, weight 2^(i+1)
);
  logic b, c;
  assign b  = x2 ^ x3;
  assign c  = x12 | b;
  assign w0 = x12 ^ x3;
  assign w1 = c ^ w0;
endmodule
