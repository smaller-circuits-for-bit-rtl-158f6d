// Exhaustive test of mdfa_prime: for all 16 values of x1, x2, x4, x5, fed as
// x1^x2, x2, x4, x4^x5, b0 + 2*(a1 + b1) must equal x1 + x2 + x4 + x5.
module mdfa_prime_tb;
  logic x12, x2, x4, x45, b0, a1, a1b1;
  int checks = 0, failures = 0;
  mdfa_prime dut (.x12(x12), .x2(x2), .x4(x4), .x45(x45), .b0(b0), .a1(a1), .a1b1(a1b1));
  initial begin
    #1000;
    $display("mdfa_prime_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    int b1;
    for (int v = 0; v < 16; v++) begin
      x12 = v[0] ^ v[1];
      x2  = v[1];
      x4  = v[2];
      x45 = v[2] ^ v[3];
      #1;
      b1 = int'(a1 ^ a1b1);
      checks++;
      if (int'(b0) + 2 * (int'(a1) + b1) != $countones(v[3:0])) begin
        failures++;
        $display("mdfa_prime_tb: bits %b gave b0=%0d a1=%0d a1^b1=%0d", v[3:0], b0, a1, a1b1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
