// MDFA: Modified Double Full Adder.
//
// Adds five bits of one layer, x1 + x2 + x3 + x4 + x5 = b0 + 2(a1 + b1), where
// (x1, x2) and (x4, x5) arrive as pairs, i.e. as x1^x2, x2 and x4, x4^x5, and
// the carry pair (a1, b1) leaves in the same encoding, as a1 and a1^b1. b0 is
// the new unpaired bit of the layer. Keeping pairs in this encoding lets the
// block do in eight gates what two chained Full Adders do in ten.
//
// Gates (g2..g10 of the optimal five-bit counter, without its first XOR):
//   g2 = x2 ^ x3,  g3 = x12 | g2,  g4 = x12 ^ x3,  a1 = g3 ^ g4,
//   g6 = x4 ^ g4,  g8 = g6 & ~x45, b0 = x45 ^ g4,  a1b1 = g3 ^ g8.
// Purely combinational.
module mdfa (
  input  logic x12,   // x1 ^ x2
  input  logic x2,    // x2
  input  logic x3,    // unpaired bit
  input  logic x4,    // x4
  input  logic x45,   // x4 ^ x5
  output logic b0,    // sum bit, weight 2^i
  output logic a1,    // carry pair, stored bit (weight 2^(i+1))
  output logic a1b1   // carry pair, parity a1 ^ b1
);
  logic g2, g3, g4, g6, g8;
  assign g2   = x2 ^ x3;
  assign g3   = x12 | g2;
  assign g4   = x12 ^ x3;
  assign a1   = g3 ^ g4;
  assign g6   = x4 ^ g4;
  assign g8   = g6 & ~x45;
  assign b0   = x45 ^ g4;
  assign a1b1 = g3 ^ g8;
endmodule
