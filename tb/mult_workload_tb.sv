// Runs the MDFA multiplier at the second size of the multiplier table,
// MULT_80: checks its size, 80^2 AND gates plus the bit adder's gates, against
// 34679 two-input gates, and its products on all-ones and random operands.
module mult_workload_tb;
  logic [79:0]  ma, mb;
  logic [159:0] mp;
  int checks = 0, failures = 0;

  mult_mdfa #(.N(80)) u_mult80 (.a(ma), .b(mb), .p(mp));

  initial begin
    #1000000;
    $display("mult_workload_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [159:0] r;
    ma = '0; mb = '0;
    checks++;
    if (80 * 80 + u_mult80.u_sum.GATES != 34679) begin
      failures++;
      $display("mult_workload_tb: MULT_80 size %0d, expected 34679", 80 * 80 + u_mult80.u_sum.GATES);
    end
    for (int t = 0; t < 200; t++) begin
      if (t == 0) begin ma = '1; mb = '1; end
      else begin
        for (int w = 0; w < 80; w += 16) begin
          ma[w +: 16] = 16'($urandom);
          mb[w +: 16] = 16'($urandom);
        end
      end
      #1;
      r = 160'(ma) * 160'(mb);
      checks++;
      if (mp != r) begin
        failures++;
        if (failures < 10) $display("mult_workload_tb: %h * %h gave %h", ma, mb, mp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
