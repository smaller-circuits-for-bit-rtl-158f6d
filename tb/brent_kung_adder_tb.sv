// Self-checking test of brent_kung_adder: all operand pairs at widths 5 and
// 6 (non-power-of-two and power-of-two-adjacent prefix trees) and 8, and
// random operands at widths 32 and 45, against the simulator's addition.
module brent_kung_adder_tb;
  logic [4:0]  a5, b5;   logic [5:0]  s5;
  logic [5:0]  a6, b6;   logic [6:0]  s6;
  logic [7:0]  a8, b8;   logic [8:0]  s8;
  logic [31:0] a32, b32; logic [32:0] s32;
  logic [44:0] a45, b45; logic [45:0] s45;
  int checks = 0, failures = 0;

  brent_kung_adder #(.N(5))  d5  (.a(a5),  .b(b5),  .s(s5));
  brent_kung_adder #(.N(6))  d6  (.a(a6),  .b(b6),  .s(s6));
  brent_kung_adder #(.N(8))  d8  (.a(a8),  .b(b8),  .s(s8));
  brent_kung_adder #(.N(32)) d32 (.a(a32), .b(b32), .s(s32));
  brent_kung_adder #(.N(45)) d45 (.a(a45), .b(b45), .s(s45));

  initial begin
    #1000000;
    $display("brent_kung_adder_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic fail(input string w);
    failures++;
    if (failures < 10) $display("brent_kung_adder_tb: %s", w);
  endtask

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a5 = 5'(i); b5 = 5'(j); a6 = 6'(i); b6 = 6'(j); a8 = 8'(i); b8 = 8'(j);
        #1;
        if (i < 32 && j < 32) begin
          checks++;
          if (int'(s5) != i + j) fail($sformatf("5-bit %0d + %0d gave %0d", i, j, s5));
        end
        if (i < 64 && j < 64) begin
          checks++;
          if (int'(s6) != i + j) fail($sformatf("6-bit %0d + %0d gave %0d", i, j, s6));
        end
        checks++;
        if (int'(s8) != i + j) fail($sformatf("8-bit %0d + %0d gave %0d", i, j, s8));
      end
    for (int t = 0; t < 5000; t++) begin
      a32 = $urandom; b32 = (t % 7 == 0) ? ~a32 + 32'(t % 2) : $urandom;
      a45 = {$urandom, $urandom}; b45 = (t % 5 == 0) ? ~a45 : {$urandom, $urandom};
      #1;
      checks += 2;
      if (s32 != 33'(a32) + 33'(b32)) fail($sformatf("32-bit %h + %h gave %h", a32, b32, s32));
      if (s45 != 46'(a45) + 46'(b45)) fail($sformatf("45-bit %h + %h gave %h", a45, b45, s45));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
