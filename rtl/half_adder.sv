// Half Adder: the sum of two bits of one layer, in two gates.
//
// w0 = x1 ^ x2 stays in the layer, w1 = x1 & x2 moves to the next one.
// Purely combinational. Used by the logarithmic-depth bit adder, where bits
// are not kept in pairs; the pair-encoded form of the same block is pair_ha.
module half_adder (
  input  logic x1,
  input  logic x2,
  output logic w0,   // sum bit, weight 2^i
  output logic w1    // carry bit, weight 2^(i+1)
);
  assign w0 = x1 ^ x2;
  assign w1 = x1 & x2;
endmodule
