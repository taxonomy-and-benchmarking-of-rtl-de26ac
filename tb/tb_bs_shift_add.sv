// tb_bs_shift_add: drives the two-phase bit-serial registers with random L2 sums, one
// per (weight BG j, activation BG k) pair in the order of the paper's schedule, and
// checks the final result against sum_jk s[j][k] * 4^(j+k) for all precision pairs.
// It also checks that back-to-back products do not disturb each other.
module tb_bs_shift_add;
  import psma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;
  prec_e pw, pi;
  logic p1_en, p1_first, p2_en, p2_first;
  logic [7:0]  sum;
  logic [19:0] res;
  bs_shift_add u_dut (.clk(clk), .rst_n(rst_n), .prec_w(pw), .prec_i(pi),
    .p1_en(p1_en), .p1_first(p1_first), .p2_en(p2_en), .p2_first(p2_first),
    .sum_i(sum), .res_o(res));

  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    rst_n = 0; p1_en = 0; p1_first = 0; p2_en = 0; p2_first = 0; sum = 0; pw = P8; pi = P8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++)
        for (int t = 0; t < 10; t++) begin
          int bw, bi;
          longint exp;
          logic n_p2, n_p2f;
          pw = ps[x]; pi = ps[y]; bw = nbg(pw); bi = nbg(pi);
          exp = 0; n_p2 = 0; n_p2f = 0;
          for (int j = 0; j < bw; j++)
            for (int k = 0; k < bi; k++) begin
              int s;
              s = $urandom_range(144);
              exp += longint'(s) << (2 * (j + k));
              @(negedge clk);
              p1_en = 1; p1_first = (k == 0); sum = 8'(s);
              p2_en = n_p2; p2_first = n_p2f;
              n_p2 = (k == bi - 1); n_p2f = (k == bi - 1) && (j == 0);
            end
          @(negedge clk);
          p1_en = 0; p2_en = n_p2; p2_first = n_p2f;
          @(negedge clk);
          p2_en = 0;
          checks++;
          if (longint'(res) != exp) begin
            failures++;
            if (failures < 10) $display("pw=%s pi=%s got %0d exp %0d", pw.name(), pi.name(), res, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
