// Shared types and constants of the bit-addition circuits.
//
// A "layer" is the set of bits of one significance 2^L. After the pairing step
// each layer holds some number of pairs plus at most one unpaired bit. A pair
// of bits (p, q) is carried in the encoding (u, x) = (p, p ^ q), so a pair's
// parity x is available without a further gate. layer_t records, for one
// layer, how many pairs and unpaired bits it holds and which blocks reduce it;
// it is filled in at elaboration time by bit_adder's schedule function.
package bitadd_pkg;

  // Karatsuba recursion switches to the direct MDFA multiplier when the
  // operand width is smaller than this (Section 5.2 of the design notes: "when
  // n is smaller than 20").
  localparam int unsigned KARATSUBA_BASE = 20;

  // Which block reduces a layer, selected by l mod 4 where l = 2*pairs + unpaired.
  typedef enum logic [1:0] {
    RED_MDFA_PRIME = 2'd0,  // l = 4k   : one MDFA', then k-1 MDFA
    RED_MDFA_ONLY  = 2'd1,  // l = 4k+1 : k MDFA
    RED_HALF       = 2'd2,  // l = 4k+2 : half adder on a pair, then k MDFA
    RED_FULL       = 2'd3   // l = 4k+3 : full adder on a pair and the unpaired bit, then k MDFA
  } reduce_e;

  // Elaboration-time description of one layer.
  typedef struct packed {
    int npre;   // pairs formed from this layer's own inputs
    int upre;   // 1 if an input bit was left unpaired
    int pin;    // pairs arriving from the layer below (one per MDFA/MDFA' there)
    int cin;    // 1 if a single carry arrives from the layer below (HA/FA there)
    int cpair;  // 1 if that carry is paired with the unpaired input bit (one XOR)
    int p;      // pairs in the layer after all arrivals
    int u;      // unpaired bits (0 or 1) after all arrivals
    int k;      // number of MDFA/MDFA' blocks applied: l / 4
    int r;      // l mod 4, see reduce_e
    int poff;   // offset of this layer's pairs in the pair pool
    int coff;   // offset of this layer's unpaired-bit chain
    int nch;    // length of that chain
    int gates;  // two-input gates spent on this layer
  } layer_t;

endpackage
