// Half Adder on a paired bit.
//
// The two bits p, q of one layer arrive as a pair (u, x) = (p, p ^ q). Their
// sum bit is x itself, so only the carry costs a gate: c = u > x = u & ~x,
// which equals p & q. One two-input gate, purely combinational, no clock.
// The gate follows the "l = 2" case of the construction (the x > y operation
// is the paper's); the port names are this design's own.
module pair_ha (
  input  logic u,   // first bit of the pair, p
  input  logic x,   // parity of the pair, p ^ q
  output logic s,   // sum bit, weight 2^i
  output logic c    // carry bit, weight 2^(i+1)
);
  assign s = x;
  assign c = u & ~x;
endmodule
