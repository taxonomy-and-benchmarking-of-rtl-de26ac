// tb_psma_acc: checks the output accumulators: load on first, add otherwise, hold when
// not enabled, and the 4-bit headroom (sums beyond the input width are kept).
module tb_psma_acc;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n, en, first;
  always #5 clk = ~clk;
  logic [7:0]  res [4];
  logic [11:0] acc [4];
  psma_acc #(.NO(4), .IW(8)) u_dut (.clk(clk), .rst_n(rst_n), .en(en), .first(first), .res_i(res), .acc_o(acc));
  int model [4];
  initial begin
    rst_n = 0; en = 0; first = 0;
    for (int k = 0; k < 4; k++) begin res[k] = 0; model[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      en = 1'($urandom); first = ($urandom_range(7) == 0);
      for (int k = 0; k < 4; k++) res[k] = 8'($urandom);
      if (en) for (int k = 0; k < 4; k++) model[k] = (first ? 0 : model[k]) + int'(res[k]);
      for (int k = 0; k < 4; k++) model[k] &= 12'hfff;
      @(posedge clk); #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (int'(acc[k]) != model[k]) begin
          failures++;
          if (failures < 10) $display("slot %0d got %0d exp %0d", k, acc[k], model[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
