// MDFA': the MDFA block without an unpaired input.
//
// Adds two pairs of one layer, x1 + x2 + x4 + x5 = b0 + 2(a1 + b1), with the
// same pair encoding as mdfa. It is mdfa with its unpaired input x3 tied to a
// constant, which removes the two gates fed by x3 and leaves six.
//
// The constant is 0 here. The written definition of MDFA' ties x3 to 1, which
// would add one to the result; the 16-bit counter built from MDFA' blocks only
// counts correctly with 0, and 0 removes the same two gates.
//
// Gates: g3 = x12 | x2, a1 = g3 ^ x12, g6 = x4 ^ x12, g8 = g6 & ~x45,
//        b0 = x45 ^ x12, a1b1 = g3 ^ g8. Purely combinational.
module mdfa_prime (
  input  logic x12,   // x1 ^ x2
  input  logic x2,    // x2
  input  logic x4,    // x4
  input  logic x45,   // x4 ^ x5
  output logic b0,    // sum bit, weight 2^i
  output logic a1,    // carry pair, stored bit
  output logic a1b1   // carry pair, parity a1 ^ b1
);
  logic g3, g6, g8;
  assign g3   = x12 | x2;
  assign a1   = g3 ^ x12;
  assign g6   = x4 ^ x12;
  assign g8   = g6 & ~x45;
  assign b0   = x45 ^ x12;
  assign a1b1 = g3 ^ g8;
endmodule
