// Exhaustive test of half_adder: w0 + 2*w1 must equal x1 + x2.
module half_adder_tb;
  logic x1, x2, w0, w1;
  int checks = 0, failures = 0;
  half_adder dut (.x1(x1), .x2(x2), .w0(w0), .w1(w1));
  initial begin
    #1000;
    $display("half_adder_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int v = 0; v < 4; v++) begin
      {x2, x1} = 2'(v);
      #1;
      checks++;
      if (int'(w0) + 2 * int'(w1) != $countones(v[1:0])) begin
        failures++;
        $display("half_adder_tb: bits %b gave w0=%0d w1=%0d", v[1:0], w0, w1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
