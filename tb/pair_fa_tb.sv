// Exhaustive test of pair_fa: for all eight values of x1, x2, x3, with x1 and
// x2 fed as the pair (x1 ^ x2, x2), w0 + 2*w1 must equal x1 + x2 + x3.
module pair_fa_tb;
  logic x12, x2, x3, w0, w1;
  int checks = 0, failures = 0;
  pair_fa dut (.x12(x12), .x2(x2), .x3(x3), .w0(w0), .w1(w1));
  initial begin
    #1000;
    $display("pair_fa_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int v = 0; v < 8; v++) begin
      x12 = v[0] ^ v[1];
      x2  = v[1];
      x3  = v[2];
      #1;
      checks++;
      if (int'(w0) + 2 * int'(w1) != int'(v[0]) + int'(v[1]) + int'(v[2])) begin
        failures++;
        $display("pair_fa_tb: bits %b gave w0=%0d w1=%0d", v[2:0], w0, w1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
