// Unsigned n x n Karatsuba multiplier on top of MDFA multipliers.
//
// Splits each operand at H = floor(N/2): a = ah*2^H + al, b = bh*2^H + bl, and
// makes three recursive multiplications,
//   z0 = al*bl,  z2 = ah*bh,  z1 = (al + ah)*(bl + bh),
// from which a*b = z2*2^(2H) + (z1 - z0 - z2)*2^H + z0. The recursion stops,
// and mult_mdfa takes over, when N is below BASE (20). All additions are done
// by bit_adder: the operand sums al+ah and bl+bh are two-row bit additions,
// and the final combination is a single bit addition of z0, z2, z1, the
// complements of z0 and z2, and a constant, taken modulo 2^(2N). The
// complements use the identity -z = ~z + 1 (mod 2^M), with the +1s, the ones
// of the complements' extension above the width of z, and the wrap-around
// folded into one constant KC. Purely combinational, no clock.
//
// The three recursive calls and the switch to the MDFA multiplier below 20
// bits follow the paper; how the sums and the subtraction are built (the
// complement-and-constant scheme, one bit adder for the whole combination) is
// this design's own choice, as the paper only says that the partial results
// are combined "using summation and subtraction only". So the size of this
// circuit is not expected to equal the paper's Karatsuba figures.
//
// Interface: p = a * b, all unsigned, 2N bits.
//
// Lint note: Verilator may report z0, z1 and z2 as undriven. The module
// instantiates itself, and that report concerns the generic, unparameterised
// copy of the module that the tool keeps for the recursion, not an
// elaborated instance: in every instance the three products are driven by
// u_lo, u_hi and u_mid, and the testbench checks every product bit.
module karatsuba_mult
  import bitadd_pkg::*;
#(
  parameter int N    = 40,                   // operand width
  parameter int BASE = int'(KARATSUBA_BASE)  // use mult_mdfa when N < BASE
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  // Split of the operands and the widths of the partial results.
  localparam int H  = N / 2;       // width of the low halves
  localparam int NH = N - H;       // width of the high halves (H or H+1)
  localparam int NS = NH + 1;      // width of al+ah and bl+bh
  localparam int NP = 2 * N;       // product width
  localparam int M  = NP - H;      // width of the middle term's window

  // ---- operand sums al + ah, bl + bh ------------------------------------
  typedef int scnt_t [NH];
  function automatic scnt_t sum_cnt();
    scnt_t c;
    for (int i = 0; i < NH; i++) c[i] = (i < H) ? 2 : 1;
    return c;
  endfunction
  localparam scnt_t SCNT = sum_cnt();

  // ---- combination: z0 + z2<<2H + (z1 + ~z0 + ~z2 + 2)<<H  (mod 2^NP) -----
  // Constant part: +2 at weight 2^H, plus the ones that extend ~z0 and ~z2
  // from their own width up to M bits, all at weight 2^H.
  function automatic logic [NP-1:0] const_k();
    logic [NP-1:0] k = '0;
    k += NP'(2) << H;
    for (int i = 2 * H; i < M; i++)  k += NP'(1) << (H + i);
    for (int i = 2 * NH; i < M; i++) k += NP'(1) << (H + i);
    return k;
  endfunction
  localparam logic [NP-1:0] KC = const_k();

  // Which terms have a bit in column c, in the order they are packed.
  function automatic int has_z0(input int c);  return (c < 2 * H) ? 1 : 0; endfunction
  function automatic int has_z2(input int c);  return (c >= 2 * H) ? 1 : 0; endfunction
  function automatic int has_z1(input int c);  return (c >= H && c < H + 2 * NS) ? 1 : 0; endfunction
  function automatic int has_nz0(input int c); return (c >= H && c < 3 * H) ? 1 : 0; endfunction
  function automatic int has_nz2(input int c); return (c >= H && c < H + 2 * NH) ? 1 : 0; endfunction
  function automatic int has_k(input int c);   return KC[c] ? 1 : 0; endfunction
  function automatic int col_cnt(input int c);
    return has_z0(c) + has_z2(c) + has_z1(c) + has_nz0(c) + has_nz2(c) + has_k(c);
  endfunction
  function automatic int col_off(input int c);
    int s = 0;
    for (int j = 0; j < c; j++) s += col_cnt(j);
    return s;
  endfunction

  typedef int ccnt_t [NP];
  function automatic ccnt_t comb_cnt();
    ccnt_t c;
    for (int i = 0; i < NP; i++) c[i] = col_cnt(i);
    return c;
  endfunction
  localparam ccnt_t CCNT = comb_cnt();
  localparam int    NIN  = col_off(NP);

  if (N < BASE || N < 4) begin : g_base
    mult_mdfa #(.N(N)) u_mult (.a(a), .b(b), .p(p));
  end else begin : g_split
    logic [H+NH-1:0] va, vb;   // column-ordered inputs of the two sum adders
    logic [NS-1:0]   sa, sb;

    for (genvar i = 0; i < NH; i++) begin : g_sumcol
      if (i < H) begin : g_two
        assign va[2 * i]     = a[i];
        assign va[2 * i + 1] = a[H + i];
        assign vb[2 * i]     = b[i];
        assign vb[2 * i + 1] = b[H + i];
      end else begin : g_one
        assign va[H + i] = a[H + i];
        assign vb[H + i] = b[H + i];
      end
    end

    bit_adder #(.W(NH), .CNT(SCNT)) u_suma (.x(va), .y(sa));
    bit_adder #(.W(NH), .CNT(SCNT)) u_sumb (.x(vb), .y(sb));

    // ---- the three products ------------------------------------------------
    logic [2*H-1:0]  z0;
    logic [2*NH-1:0] z2;
    logic [2*NS-1:0] z1;

    karatsuba_mult #(.N(H),  .BASE(BASE)) u_lo  (.a(a[H-1:0]), .b(b[H-1:0]), .p(z0));
    karatsuba_mult #(.N(NH), .BASE(BASE)) u_hi  (.a(a[N-1:H]), .b(b[N-1:H]), .p(z2));
    karatsuba_mult #(.N(NS), .BASE(BASE)) u_mid (.a(sa),        .b(sb),        .p(z1));

    logic [NIN-1:0] v;
    logic [NP-1:0]  y;

    for (genvar c = 0; c < NP; c++) begin : g_col
      localparam int O  = col_off(c);
      localparam int K1 = O + has_z0(c);
      localparam int K2 = K1 + has_z2(c);
      localparam int K3 = K2 + has_z1(c);
      localparam int K4 = K3 + has_nz0(c);
      localparam int K5 = K4 + has_nz2(c);
      if (has_z0(c) != 0)  begin : g_z0  assign v[O]  = z0[c];            end
      if (has_z2(c) != 0)  begin : g_z2  assign v[K1] = z2[c - 2 * H];    end
      if (has_z1(c) != 0)  begin : g_z1  assign v[K2] = z1[c - H];        end
      if (has_nz0(c) != 0) begin : g_nz0 assign v[K3] = ~z0[c - H];       end
      if (has_nz2(c) != 0) begin : g_nz2 assign v[K4] = ~z2[c - H];       end
      if (has_k(c) != 0)   begin : g_k   assign v[K5] = 1'b1;             end
    end

    // The bit adder's full sum is wider than NP; only its low NP bits (the
    // sum modulo 2^NP, which is the product) are taken.
    bit_adder #(.W(NP), .CNT(CCNT), .YW(NP)) u_comb (.x(v), .y(y));
    assign p = y;
  end
endmodule
