// Unsigned n x n multiplier whose partial products are summed by the bit adder.
//
// The N*N partial products a[i] & b[j] (N*N AND gates) have weight 2^(i+j),
// so column c of the dot diagram holds min(c+1, 2N-1-c) bits. They are handed,
// column by column, to bit_adder, which flattens them with MDFA/MDFA' blocks
// into the 2N-bit product. This is the multiplication scheme of the paper's
// "MDFA" multiplier; its size is N^2 plus the bit adder's gates, 8539 two-input
// gates for N = 40. Purely combinational, no clock.
//
// Interface: p = a * b, all unsigned. Within a column, partial products are
// ordered by increasing index i of a (this design's choice; the sum does not
// depend on it).
module mult_mdfa #(
  parameter int N = 40   // operand width; 40 is the smallest size evaluated
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  localparam int NC = 2 * N - 1;   // number of partial-product columns
  typedef int cnt_t [NC];

  function automatic cnt_t col_heights();
    cnt_t h;
    for (int c = 0; c < NC; c++) h[c] = (c < N) ? c + 1 : NC - c;
    return h;
  endfunction

  // First bit of column c in the flattened input of the bit adder.
  function automatic int col_off(input int c);
    int s = 0;
    for (int j = 0; j < c; j++) s += (j < N) ? j + 1 : NC - j;
    return s;
  endfunction

  localparam cnt_t CNT = col_heights();

  logic [N*N-1:0] pp;    // partial products, column-major
  logic [2*N-1:0] sum;

  for (genvar c = 0; c < NC; c++) begin : g_col
    localparam int ILO = (c < N) ? 0 : c - N + 1;
    localparam int IHI = (c < N) ? c : N - 1;
    for (genvar i = ILO; i <= IHI; i++) begin : g_pp
      assign pp[col_off(c) + i - ILO] = a[i] & b[c - i];
    end
  end

  bit_adder #(.W(NC), .CNT(CNT)) u_sum (.x(pp), .y(sum));

  assign p = sum;

endmodule
