// Self-checking test of mult_mdfa. A 5x5 instance is checked on all 1024
// operand pairs; the default 40x40 instance on corner values and random
// operands, and its size (40^2 AND gates plus the bit adder) against the
// 8539 two-input gates of the MDFA multiplier for n = 40.
module mult_mdfa_tb;
  logic [4:0]  a5, b5;
  logic [9:0]  p5;
  logic [39:0] a, b;
  logic [79:0] p;
  int checks = 0, failures = 0;

  mult_mdfa #(.N(5)) dut5 (.a(a5), .b(b5), .p(p5));
  mult_mdfa dut (.a(a), .b(b), .p(p));

  initial begin
    #100000;
    $display("mult_mdfa_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check40(input logic [39:0] x, input logic [39:0] y);
    logic [79:0] r;
    a = x; b = y;
    #1;
    r = 80'(x) * 80'(y);
    checks++;
    if (p != r) begin
      failures++;
      if (failures < 10) $display("mult_mdfa_tb: %h * %h gave %h, expected %h", x, y, p, r);
    end
  endtask

  initial begin
    checks++;
    if (40 * 40 + dut.u_sum.GATES != 8539) begin
      failures++;
      $display("mult_mdfa_tb: size %0d, expected 8539", 40 * 40 + dut.u_sum.GATES);
    end
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 32; j++) begin
        a5 = 5'(i); b5 = 5'(j);
        #1;
        checks++;
        if (int'(p5) != i * j) begin
          failures++;
          if (failures < 10) $display("mult_mdfa_tb: 5-bit %0d * %0d gave %0d", i, j, p5);
        end
      end
    check40('0, '0);
    check40('1, '1);
    check40('1, 40'd1);
    check40(40'h80_0000_0000, 40'h80_0000_0000);
    for (int t = 0; t < 3000; t++)
      check40({$urandom, $urandom} >> ($urandom % 40), {$urandom, $urandom} >> ($urandom % 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
