// tb_l1_mult: exhaustive check of the 2b x 2b L1 multiplier, with and without gating.
module tb_l1_mult;
  logic en;
  logic [1:0] a, b;
  logic [3:0] p;
  int checks = 0, failures = 0;
  l1_mult u_dut (.en(en), .a(a), .b(b), .p(p));
  initial begin
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          en = 1'(g); a = 2'(i); b = 2'(j);
          #1;
          checks++;
          if (int'(p) != (g ? i * j : 0)) begin
            failures++;
            $display("en=%0d %0d*%0d gave %0d", g, i, j, p);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
