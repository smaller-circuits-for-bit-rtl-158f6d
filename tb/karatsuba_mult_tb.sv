// Self-checking test of karatsuba_mult. Instances: the default 40-bit one
// (two levels of splitting above 10- to 12-bit MDFA multipliers), a 23-bit
// one (odd width, unequal halves), and a 6-bit one with the switch-over
// lowered to 4 bits, checked on all 4096 operand pairs so that every level's
// complement-and-constant combination is exercised exhaustively. Products are
// compared with the simulator's own multiplication.
module karatsuba_mult_tb;
  logic [39:0] a, b;
  logic [79:0] p;
  logic [22:0] a23, b23;
  logic [45:0] p23;
  logic [5:0]  a6, b6;
  logic [11:0] p6;
  int checks = 0, failures = 0;

  karatsuba_mult dut (.a(a), .b(b), .p(p));
  karatsuba_mult #(.N(23)) dut23 (.a(a23), .b(b23), .p(p23));
  karatsuba_mult #(.N(6), .BASE(4)) dut6 (.a(a6), .b(b6), .p(p6));

  initial begin
    #100000;
    $display("karatsuba_mult_tb: watchdog expired");
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
      if (failures < 10) $display("karatsuba_mult_tb: %h * %h gave %h, expected %h", x, y, p, r);
    end
  endtask

  task automatic check23(input logic [22:0] x, input logic [22:0] y);
    logic [45:0] r;
    a23 = x; b23 = y;
    #1;
    r = 46'(x) * 46'(y);
    checks++;
    if (p23 != r) begin
      failures++;
      if (failures < 10) $display("karatsuba_mult_tb: 23-bit %h * %h gave %h, expected %h", x, y, p23, r);
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        a6 = 6'(i); b6 = 6'(j);
        #1;
        checks++;
        if (int'(p6) != i * j) begin
          failures++;
          if (failures < 10) $display("karatsuba_mult_tb: 6-bit %0d * %0d gave %0d", i, j, p6);
        end
      end
    check40('0, '0);
    check40('1, '1);
    check40('1, 40'd1);
    check40(40'hff_ffff_ffff, 40'h00_000f_ffff);
    check23('1, '1);
    check23('0, '1);
    for (int t = 0; t < 3000; t++) begin
      check40({$urandom, $urandom} >> ($urandom % 40), {$urandom, $urandom} >> ($urandom % 40));
      check23(23'($urandom >> ($urandom % 23)), 23'($urandom >> ($urandom % 23)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
