// Test helper: drives one log_depth_bit_adder instance with random (or, when the input
// is narrow enough, all) input vectors and compares its output with the
// weighted sum computed directly, column by column. Results are left in
// checks/failures; done rises when finished.
module ldba_probe #(
  parameter int W         = 1,
  parameter int CNT [W]   = '{7},
  parameter int EXP_WOUT  = -1,
  parameter int ITER      = 2000
) (
  output int   checks,
  output int   failures,
  output logic done
);
  function automatic int sum_cnt();
    int s = 0;
    for (int i = 0; i < W; i++) s += CNT[i];
    return s;
  endfunction
  localparam int NIN = sum_cnt();

  logic [NIN-1:0] x;
  // Output width expected from the value range: ceil(log2(max + 1)).
  function automatic int ref_wout();
    logic [255:0] m = '0;
    int n = 1;
    for (int L = 0; L < W; L++) m += 256'(CNT[L]) << L;
    for (int i = 0; i < 256; i++) if (m[i]) n = i + 1;
    return n;
  endfunction
  localparam int WO = ref_wout();

  logic [WO-1:0] y;

  log_depth_bit_adder #(.W(W), .CNT(CNT)) dut (.x(x), .y(y));

  // Reference: sum of the column bits, each shifted by its column index.
  function automatic logic [255:0] ref_sum(input logic [NIN-1:0] v);
    logic [255:0] s = '0;
    int o = 0;
    for (int L = 0; L < W; L++)
      for (int j = 0; j < CNT[L]; j++) begin
        s += 256'(v[o]) << L;
        o++;
      end
    return s;
  endfunction

  initial begin
    logic [255:0] r, got;
    int n;
    checks = 0; failures = 0; done = 1'b0;
    x = '0;
    if (EXP_WOUT >= 0) begin
      checks++;
      if (dut.WMAX != EXP_WOUT) begin
        failures++;
        $display("ldba_probe W=%0d: output width %0d, expected %0d", W, dut.WMAX, EXP_WOUT);
      end
    end
    n = (NIN <= 12) ? (1 << NIN) : ITER;
    for (int t = 0; t < n; t++) begin
      if (NIN <= 12) x = NIN'(t);
      else if (t == 0) x = '0;
      else if (t == 1) x = '1;
      else for (int b = 0; b < NIN; b++) x[b] = ($urandom % 4 == 0) ^ (t % 3 == 0);
      #1;
      r = ref_sum(x);
      got = '0;
      got[$bits(y)-1:0] = y;
      checks++;
      if (got != r || (r >> $bits(y)) != 0) begin
        failures++;
        if (failures < 10) $display("ldba_probe W=%0d: x=%h y=%0d expected %0d", W, x, got, r);
      end
    end
    done = 1'b1;
  end
endmodule
