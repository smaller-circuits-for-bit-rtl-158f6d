// Exhaustive test of pair_ha: for both bits p, q of a pair fed as (p, p ^ q),
// the sum and carry outputs must equal the two-bit sum p + q.
module pair_ha_tb;
  logic u, x, s, c;
  int checks = 0, failures = 0;
  pair_ha dut (.u(u), .x(x), .s(s), .c(c));
  initial begin
    #1000;
    $display("pair_ha_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int v = 0; v < 4; v++) begin
      u = v[0];
      x = v[0] ^ v[1];
      #1;
      checks++;
      if (int'(s) + 2 * int'(c) != int'(v[0]) + int'(v[1])) begin
        failures++;
        $display("pair_ha_tb: p=%0d q=%0d gave s=%0d c=%0d", v[0], v[1], s, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
