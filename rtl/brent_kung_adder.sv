// Brent-Kung adder: adds two N-bit numbers in O(N) gates and O(log N) depth.
//
// Each bit position first forms generate g = a & b and propagate p = a ^ b.
// The carries are then a parallel prefix of the pairs (g, p) under the
// operator (g, p) o (g', p') = (g | p & g', p & p'): an up-sweep combines
// pairs at distances 1, 2, 4, ... into the positions 2^(l+1)-1 mod 2^(l+1),
// and a down-sweep fills in the remaining positions, in about 2 log2 N
// levels and fewer than 2N operator nodes. After both sweeps G[i] is the
// carry out of bits 0..i, so s[i] = p[i] ^ G[i-1] and s[N] = G[N-1].
// Purely combinational; there is no carry input.
//
// The paper names the Brent-Kung adder as the final stage of its
// logarithmic-depth construction but does not describe it; the prefix
// network here is the usual formulation.
module brent_kung_adder #(
  parameter int N = 16   // operand width
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   s
);
  localparam int LG = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0] p0;
  logic [N-1:0] gg, pp;   // prefix (generate, propagate) after both sweeps

  assign p0 = a ^ b;

  always_comb begin
    gg = a & b;
    pp = p0;
    // up-sweep
    for (int l = 0; l < LG; l++)
      for (int i = 0; i < N; i++)
        if ((i + 1) % (2 << l) == 0) begin
          gg[i] = gg[i] | (pp[i] & gg[i - (1 << l)]);
          pp[i] = pp[i] & pp[i - (1 << l)];
        end
    // down-sweep
    for (int l = LG - 2; l >= 0; l--)
      for (int i = 0; i < N; i++)
        if (i >= (3 << l) - 1 && (i + 1 - (3 << l)) % (2 << l) == 0) begin
          gg[i] = gg[i] | (pp[i] & gg[i - (1 << l)]);
          pp[i] = pp[i] & pp[i - (1 << l)];
        end
  end

  assign s[0] = p0[0];
  for (genvar i = 1; i < N; i++) begin : g_sum
    assign s[i] = p0[i] ^ gg[i - 1];
  end
  assign s[N] = gg[N-1];
endmodule
