// Logarithmic-depth bit adder: the same function as bit_adder, in O(log n) depth.
//
// bit_adder reduces the layers one after another, so its depth grows
// linearly with the number of inputs. This variant works on all layers at
// once. While some column holds more than three bits, every column is
// reduced in parallel by as many Full Adders as fit (each turns three bits of
// a column into a sum bit there and a carry bit in the next column), which
// shrinks the tallest column to about two thirds per stage. When no column
// holds more than three bits, one last stage puts a Full Adder on every
// column of three and a Half Adder on every column of two, which leaves at
// most two bits per column. The two remaining rows are added by a Brent-Kung
// adder. Each stage has constant depth and there are O(log n) of them, so the
// whole circuit has logarithmic depth and linear size. Purely combinational.
//
// Interface: as bit_adder, x is the concatenation of the input columns
// (CNT[L] bits of weight 2^L, least significant column first) and y their
// weighted sum, WMAX bits wide (the exact width of the largest possible sum).
//
// Follows the paper's description of the construction with Full and Half
// Adders. The paper adds that MDFA blocks can replace the Full Adders to make
// it smaller, without saying how MDFA's pairs are arranged across parallel
// stages; that refinement is not built here. Which bits of a column go into
// which adder (in order of position) is this design's own choice.
module log_depth_bit_adder #(
  parameter int W       = 1,       // number of input columns
  parameter int CNT [W] = '{31},   // input bits per column; default SUM_31
  // derived, do not override
  parameter int NIN     = sum_cnt(CNT),
  parameter int WMAX    = out_width(CNT)
) (
  input  logic [NIN-1:0]  x,
  output logic [WMAX-1:0] y
);

  // ---------------------------------------------------------------------------
  // Elaboration-time schedule
  // ---------------------------------------------------------------------------
  function automatic int sum_cnt(input int c [W]);
    int s = 0;
    for (int i = 0; i < W; i++) s += c[i];
    return s;
  endfunction

  // Bit length of the largest sum, sum of CNT[L] * 2^L.
  function automatic int out_width(input int c [W]);
    logic [W+31:0] m = '0;
    int n = 1;
    for (int i = 0; i < W; i++) m += (W + 32)'(c[i]) << i;
    for (int i = 0; i < W + 32; i++) if (m[i]) n = i + 1;
    return n;
  endfunction

  typedef int hts_t [WMAX];

  function automatic int max_of(input hts_t h);
    int m = 0;
    for (int i = 0; i < WMAX; i++) if (h[i] > m) m = h[i];
    return m;
  endfunction

  // Full and Half Adders placed on a column of height h in a stage whose
  // tallest column is hmax.
  function automatic int n_fa(input int h, input int hmax);
    return (hmax > 3) ? h / 3 : ((h == 3) ? 1 : 0);
  endfunction
  function automatic int n_ha(input int h, input int hmax);
    return (hmax > 3) ? 0 : ((h == 2) ? 1 : 0);
  endfunction

  // Column heights after one stage.
  function automatic hts_t step(input hts_t h);
    hts_t n;
    int hm = max_of(h);
    for (int L = 0; L < WMAX; L++) begin
      n[L] = h[L] - 2 * n_fa(h[L], hm) - n_ha(h[L], hm);
      if (L > 0) n[L] += n_fa(h[L-1], hm) + n_ha(h[L-1], hm);
    end
    return n;
  endfunction

  // Column heights before stage s (s = 0: the inputs).
  function automatic hts_t heights(input int s);
    hts_t h;
    for (int L = 0; L < WMAX; L++) h[L] = (L < W) ? CNT[L] : 0;
    for (int i = 0; i < s; i++) h = step(h);
    return h;
  endfunction

  function automatic int n_stages();
    hts_t h = heights(0);
    int s = 0;
    while (max_of(h) > 2) begin
      h = step(h);
      s++;
    end
    return s;
  endfunction

  function automatic int max_height();
    int m = 2;
    for (int s = 0; s <= n_stages(); s++)
      if (max_of(heights(s)) > m) m = max_of(heights(s));
    return m;
  endfunction

  function automatic int in_off(input int L);
    int s = 0;
    for (int j = 0; j < L && j < W; j++) s += CNT[j];
    return s;
  endfunction

  localparam int NST  = n_stages();
  localparam int MAXH = max_height();

  // ---------------------------------------------------------------------------
  // Netlist: g_in.b[L] holds the input bits of column L, g_stage[s].o[L] the
  // bits of column L after stage s (unused slots are tied to 0).
  // ---------------------------------------------------------------------------
  if (1) begin : g_in
    localparam hts_t H0 = heights(0);
    logic b [WMAX][MAXH];
    for (genvar L = 0; L < WMAX; L++) begin : g_col
      for (genvar j = 0; j < MAXH; j++) begin : g_bit
        if (j < H0[L]) begin : g_x
          assign b[L][j] = x[in_off(L) + j];
        end else begin : g_zero
          assign b[L][j] = 1'b0;
        end
      end
    end
  end

  for (genvar s = 0; s < NST; s++) begin : g_stage
    localparam hts_t H  = heights(s);
    localparam hts_t HN = heights(s + 1);
    localparam int   HM = max_of(H);
    logic i [WMAX][MAXH];   // column bits before this stage
    logic o [WMAX][MAXH];   // column bits after this stage
    if (s == 0) begin : g_first
      assign i = g_in.b;
    end else begin : g_next
      assign i = g_stage[s-1].o;
    end
    for (genvar L = 0; L < WMAX; L++) begin : g_col
      localparam int NFA  = n_fa(H[L], HM);
      localparam int NHA  = n_ha(H[L], HM);
      localparam int USED = 3 * NFA + 2 * NHA;          // bits consumed here
      localparam int KEEP = H[L] - USED;                // bits passed on unchanged
      localparam int CFA  = (L > 0) ? n_fa(H[L-1], HM) : 0;  // carries arriving
      localparam int CHA  = (L > 0) ? n_ha(H[L-1], HM) : 0;
      // Outputs in column L: FA sums, HA sums, kept bits, FA carries, HA carries.
      for (genvar f = 0; f < NFA; f++) begin : g_fa
        full_adder u_fa (
          .x1(i[L][3*f]), .x2(i[L][3*f+1]), .x3(i[L][3*f+2]),
          .w0(o[L][f]), .w1(o[L+1][carry_slot(H, HM, L + 1) + f])
        );
      end
      for (genvar f = 0; f < NHA; f++) begin : g_ha
        half_adder u_ha (
          .x1(i[L][3*NFA + 2*f]), .x2(i[L][3*NFA + 2*f + 1]),
          .w0(o[L][NFA + f]), .w1(o[L+1][carry_slot(H, HM, L + 1) + NFA + f])
        );
      end
      for (genvar k = 0; k < KEEP; k++) begin : g_keep
        assign o[L][NFA + NHA + k] = i[L][USED + k];
      end
      for (genvar j = HN[L]; j < MAXH; j++) begin : g_zero
        assign o[L][j] = 1'b0;
      end
      // The CFA + CHA carries from column L-1 land at slots NFA+NHA+KEEP onward.
      if (NFA + NHA + KEEP + CFA + CHA != HN[L]) begin : g_bad
        $error("log_depth_bit_adder: column height bookkeeping mismatch");
      end
    end
  end

  // First slot of column L that receives carries from column L-1.
  function automatic int carry_slot(input hts_t h, input int hm, input int L);
    return h[L] - 2 * n_fa(h[L], hm) - n_ha(h[L], hm);
  endfunction

  // Final two rows and the Brent-Kung adder.
  logic [WMAX-1:0] row0, row1;
  logic [WMAX:0]   sum;

  logic fin [WMAX][MAXH];
  if (NST == 0) begin : g_nostage
    assign fin = g_in.b;
  end else begin : g_laststage
    assign fin = g_stage[NST-1].o;
  end
  for (genvar L = 0; L < WMAX; L++) begin : g_rows
    assign row0[L] = fin[L][0];
    assign row1[L] = fin[L][1];
  end

  brent_kung_adder #(.N(WMAX)) u_bk (.a(row0), .b(row1), .s(sum));

  assign y = sum[WMAX-1:0];

endmodule
