// Bit adder BA: sums bits of arbitrary significance into one bit per layer.
//
// Given column heights CNT[L] (how many input bits have weight 2^L), the
// module outputs y with y == sum over all input bits of 2^L * bit. It is the
// construction behind the 4.5n - 2m gate bound: at most 4.5 gates per input bit
// minus 2 per output bit, about 10% fewer than Full/Half Adder (Dadda-style)
// reduction when there are many more inputs than outputs.
//
// How it works. First, in every layer all input bits but possibly one are
// grouped into pairs (p, q), and each pair is kept as (p, p ^ q): one XOR per
// pair. Then the layers are reduced from the least significant upward. A layer
// holding l bits (pairs count two) is reduced to a single bit, which is output
// y[L], by a short chain of blocks selected by l mod 4:
//   l = 4k   : MDFA' on two pairs, then k-1 MDFA
//   l = 4k+1 : k MDFA, each consuming two pairs and the running unpaired bit
//   l = 4k+2 : pair_ha on one pair (its parity becomes the unpaired bit), then k MDFA
//   l = 4k+3 : pair_fa on one pair and the unpaired bit, then k MDFA
// Every MDFA/MDFA' sends a ready-made pair to the next layer. A pair_ha or
// pair_fa sends a single carry; if the next layer has an unpaired input bit b,
// the carry c is paired with it as (b, b ^ c) at the cost of one XOR,
// otherwise c becomes that layer's unpaired bit. So no layer ever holds more
// than one unpaired bit. The schedule depends only on CNT and is worked out at
// elaboration time by the constant function lay_info(); the hardware is the
// resulting net of block instances, with no clock and no state.
//
// Interface. x is the concatenation of the columns, least significant first:
// bits x[OFF(L) +: CNT[L]] have weight 2^L, where OFF(L) is the sum of CNT
// below L. Within a column, the first bit is the one left unpaired when the
// column height is odd. y has WOUT bits, one per layer the construction
// reaches; it is the exact binary value of the weighted sum (the function has
// no bits that are always zero beyond its top). Setting YW gives y that many
// bits instead: the sum modulo 2^YW when YW < WOUT (the upper layers are
// then still built but not used), zero-extended when YW > WOUT. GATES is the number of
// two-input gates in the circuit, NOT gates being absorbed as in the full
// binary basis, and matches the construction's counts (for example 119 for
// 31 bits of equal weight). N_MDFAP, N_MDFA, N_HA, N_FA, N_CPAIR and N_PAIR
// count the blocks of each kind and the pairing XORs.
//
// Follows the paper: pairing, the four cases and their blocks, carry pairing.
// This design's own choices: the column-ordered input vector, which bit of an
// odd column stays unpaired (the first), and which pairs each block takes (in
// order of arrival: the layer's own pairs first, then pairs from below).
//
// A simulator may report the pair pool and chain arrays as UNOPTFLAT (one array is
// both read and written by the instances of one chain); this is a scheduling
// note of the simulator, not a combinational loop: each element has exactly
// one driver and the netlist is acyclic.
module bit_adder
  import bitadd_pkg::*;
#(
  parameter int W          = 1,       // number of input columns
  parameter int CNT [W]    = '{31},   // input bits per column; default SUM_31
  parameter int YW         = 0,       // output width; 0: the full width WOUT
  // derived, do not override
  parameter int NIN        = sum_cnt(CNT),
  parameter int WOUT       = n_layers(CNT),
  parameter int YOUT       = (YW > 0) ? YW : WOUT
) (
  input  logic [NIN-1:0]  x,
  output logic [YOUT-1:0] y
);

  // ---------------------------------------------------------------------------
  // Elaboration-time schedule
  // ---------------------------------------------------------------------------
  function automatic int sum_cnt(input int c [W]);
    int s = 0;
    for (int i = 0; i < W; i++) s += c[i];
    return s;
  endfunction

  function automatic int cnt_at(input int c [W], input int L);
    return (L < W) ? c[L] : 0;
  endfunction

  // Description of layer j, given the description of layer j-1 (prev).
  function automatic layer_t next_layer(input int c [W], input int j, input layer_t prev);
    layer_t i;
    int l;
    i       = '0;
    i.npre  = cnt_at(c, j) / 2;
    i.upre  = cnt_at(c, j) % 2;
    i.pin   = (j == 0) ? 0 : prev.k;
    i.cin   = (j == 0) ? 0 : ((prev.r >= 2) ? 1 : 0);
    i.cpair = (i.upre != 0 && i.cin != 0) ? 1 : 0;
    i.p     = i.npre + i.pin + i.cpair;
    i.u     = i.upre ^ i.cin;
    l       = 2 * i.p + i.u;
    i.k     = l / 4;
    i.r     = l % 4;
    i.poff  = (j == 0) ? 0 : prev.poff + prev.p;
    i.coff  = (j == 0) ? 0 : prev.coff + prev.nch;
    i.nch   = (i.r >= 2) ? i.k + 2 : i.k + 1;
    i.gates = i.npre + i.cpair;
    case (i.r)
      0: i.gates += (i.k > 0) ? 6 + 8 * (i.k - 1) : 0;
      1: i.gates += 8 * i.k;
      2: i.gates += 1 + 8 * i.k;
      default: i.gates += 4 + 8 * i.k;
    endcase
    return i;
  endfunction

  // Description of layer L, obtained by running the schedule from layer 0.
  function automatic layer_t lay_info(input int c [W], input int L);
    layer_t i = '0;
    for (int j = 0; j <= L; j++) i = next_layer(c, j, i);
    return i;
  endfunction

  // Number of layers that receive any bit: the output width.
  function automatic int n_layers(input int c [W]);
    layer_t i = '0;
    for (int L = 0; L < W + 64; L++) begin
      i = next_layer(c, L, i);
      if (L >= W && i.p == 0 && i.u == 0) return (L > 0) ? L : 1;
    end
    return W + 64;
  endfunction

  function automatic int in_off(input int c [W], input int L);
    int s = 0;
    for (int j = 0; j < L && j < W; j++) s += c[j];
    return s;
  endfunction

  function automatic int total_gates(input int c [W]);
    layer_t i = '0;
    int s = 0;
    for (int L = 0; L < W + 64; L++) begin
      i = next_layer(c, L, i);
      s += i.gates;
    end
    return s;
  endfunction

  // Number of blocks of each kind, for reports and tests. kind: 0 MDFA',
  // 1 MDFA, 2 pair_ha, 3 pair_fa, 4 carry-pairing XOR, 5 input-pairing XOR.
  function automatic int count_blocks(input int c [W], input int kind);
    layer_t i = '0;
    int s = 0;
    for (int L = 0; L < W + 64; L++) begin
      i = next_layer(c, L, i);
      case (kind)
        0: s += (i.r == 0 && i.k > 0) ? 1 : 0;
        1: s += (i.r == 0 && i.k > 0) ? i.k - 1 : i.k;
        2: s += (i.r == 2) ? 1 : 0;
        3: s += (i.r == 3) ? 1 : 0;
        4: s += i.cpair;
        default: s += i.npre;
      endcase
    end
    return s;
  endfunction

  localparam int N_MDFAP = count_blocks(CNT, 0);
  localparam int N_MDFA  = count_blocks(CNT, 1);
  localparam int N_HA    = count_blocks(CNT, 2);
  localparam int N_FA    = count_blocks(CNT, 3);
  localparam int N_CPAIR = count_blocks(CNT, 4);
  localparam int N_PAIR  = count_blocks(CNT, 5);

  localparam layer_t LAST  = lay_info(CNT, WOUT);  // first empty layer: totals
  localparam int     NPAIR = (LAST.poff > 0) ? LAST.poff : 1;
  localparam int     NCH   = LAST.coff;
  localparam int     GATES = total_gates(CNT);

  // ---------------------------------------------------------------------------
  // Netlist
  // ---------------------------------------------------------------------------
  logic pu [NPAIR];   // pair pool: stored bit of every pair, layer by layer
  logic px [NPAIR];   // pair pool: parity of every pair
  logic ch [NCH];     // per layer: unpaired bit before and after each block
  logic cy [WOUT];    // single carry leaving each layer (pair_ha / pair_fa)
  logic [WOUT-1:0] yl; // one output bit per layer

  for (genvar L = 0; L < WOUT; L++) begin : g_layer
    localparam layer_t I    = lay_info(CNT, L);
    localparam layer_t NX   = lay_info(CNT, L + 1);
    localparam int     IOFF = in_off(CNT, L);
    localparam int     P0   = I.poff;
    localparam int     C0   = I.coff;
    localparam int     NP   = NX.poff + NX.npre;  // next layer's slots for pairs from here

    // Pairing of this layer's own inputs: (p, p ^ q).
    for (genvar j = 0; j < I.npre; j++) begin : g_pair
      assign pu[P0 + j] = x[IOFF + I.upre + 2 * j];
      assign px[P0 + j] = x[IOFF + I.upre + 2 * j] ^ x[IOFF + I.upre + 2 * j + 1];
    end

    // Unpaired bit at the start of the chain, or a carry paired with it.
    if (I.cpair != 0) begin : g_cpair
      assign pu[P0 + I.npre + I.pin] = x[IOFF];
      assign px[P0 + I.npre + I.pin] = x[IOFF] ^ cy[L - 1];
      assign ch[C0] = 1'b0;
    end else if (I.upre != 0) begin : g_uin
      assign ch[C0] = x[IOFF];
    end else if (I.cin != 0) begin : g_ucy
      assign ch[C0] = cy[L - 1];
    end else begin : g_unone
      assign ch[C0] = 1'b0;
    end

    // Reduction of the layer.
    if (I.r == 0 && I.k > 0) begin : g_r0
      mdfa_prime u_first (
        .x12(px[P0]), .x2(pu[P0]), .x4(pu[P0 + 1]), .x45(px[P0 + 1]),
        .b0(ch[C0 + 1]), .a1(pu[NP]), .a1b1(px[NP])
      );
      for (genvar j = 1; j < I.k; j++) begin : g_m
        mdfa u_mdfa (
          .x12(px[P0 + 2 * j]), .x2(pu[P0 + 2 * j]), .x3(ch[C0 + j]),
          .x4(pu[P0 + 2 * j + 1]), .x45(px[P0 + 2 * j + 1]),
          .b0(ch[C0 + j + 1]), .a1(pu[NP + j]), .a1b1(px[NP + j])
        );
      end
      assign cy[L] = 1'b0;
      assign yl[L] = ch[C0 + I.k];
    end else if (I.r == 0) begin : g_empty
      assign cy[L] = 1'b0;
      assign yl[L] = 1'b0;
    end else if (I.r == 1) begin : g_r1
      for (genvar j = 0; j < I.k; j++) begin : g_m
        mdfa u_mdfa (
          .x12(px[P0 + 2 * j]), .x2(pu[P0 + 2 * j]), .x3(ch[C0 + j]),
          .x4(pu[P0 + 2 * j + 1]), .x45(px[P0 + 2 * j + 1]),
          .b0(ch[C0 + j + 1]), .a1(pu[NP + j]), .a1b1(px[NP + j])
        );
      end
      assign cy[L] = 1'b0;
      assign yl[L] = ch[C0 + I.k];
    end else begin : g_r23
      if (I.r == 2) begin : g_ha
        pair_ha u_ha (.u(pu[P0]), .x(px[P0]), .s(ch[C0 + 1]), .c(cy[L]));
      end else begin : g_fa
        pair_fa u_fa (.x12(px[P0]), .x2(pu[P0]), .x3(ch[C0]), .w0(ch[C0 + 1]), .w1(cy[L]));
      end
      for (genvar j = 0; j < I.k; j++) begin : g_m
        mdfa u_mdfa (
          .x12(px[P0 + 1 + 2 * j]), .x2(pu[P0 + 1 + 2 * j]), .x3(ch[C0 + 1 + j]),
          .x4(pu[P0 + 2 + 2 * j]), .x45(px[P0 + 2 + 2 * j]),
          .b0(ch[C0 + 2 + j]), .a1(pu[NP + j]), .a1b1(px[NP + j])
        );
      end
      assign yl[L] = ch[C0 + I.k + 1];
    end
  end

  if (YOUT <= WOUT) begin : g_ytrunc
    assign y = yl[YOUT-1:0];
  end else begin : g_yext
    assign y = {{(YOUT - WOUT){1'b0}}, yl};
  end

  if (LAST.poff == 0) begin : g_nopairs
    assign pu[0] = 1'b0;
    assign px[0] = 1'b0;
  end

endmodule
