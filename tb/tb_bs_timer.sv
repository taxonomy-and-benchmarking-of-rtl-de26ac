// tb_bs_timer: checks the bit-serial schedule: after a start the activation BG index
// steps fastest and the weight BG index after it (bw*bi cycles per product), ready is
// high in the last pair so products can follow back to back, the phase-2 strobes come
// one cycle after each last activation BG and done two cycles after the last pair,
// carrying the first/last tags of its operand set.
module tb_bs_timer;
  import psma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;
  prec_e pw, pi;
  logic start, first_i, last_i, ready, busy, p1_en, p1_first, p2_en, p2_first;
  logic done, done_first, done_last;
  logic [1:0] sel_i, sel_w;
  bs_timer u_dut (.clk(clk), .rst_n(rst_n), .prec_w(pw), .prec_i(pi), .start(start),
    .first_i(first_i), .last_i(last_i), .ready(ready), .busy(busy), .sel_i(sel_i), .sel_w(sel_w),
    .p1_en(p1_en), .p1_first(p1_first), .p2_en(p2_en), .p2_first(p2_first),
    .done(done), .done_first(done_first), .done_last(done_last));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s (pw=%s pi=%s)", what, pw.name(), pi.name()); end
  endtask

  // Expected strobes, recorded from the expected schedule.
  bit exp_p2 [$], exp_done [$];

  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    rst_n = 0; start = 0; first_i = 0; last_i = 0; pw = P8; pi = P8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(ready && !busy, "idle after reset");
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++) begin
        int bw, bi, n;
        pw = ps[x]; pi = ps[y]; bw = nbg(pw); bi = nbg(pi);
        // Three back-to-back products.
        n = 0;
        start = 1; first_i = 1; last_i = 0;
        for (int s = 0; s < 3; s++) begin
          for (int j = 0; j < bw; j++)
            for (int k = 0; k < bi; k++) begin
              @(negedge clk);
              if (j == 0 && k == 0) begin start = 0; first_i = 0; end
              chk(busy && p1_en, "busy");
              chk(int'(sel_i) == k && int'(sel_w) == j, "BG order");
              chk(p1_first == (k == 0), "p1_first");
              chk(ready == (j == bw - 1 && k == bi - 1), "ready only in last pair");
              if (j == bw - 1 && k == bi - 1 && s < 2) begin
                start = 1; last_i = (s == 1);
              end
            end
        end
        start = 0; last_i = 0;
        @(negedge clk);
        chk(!busy && ready, "idle after three products");
        chk(!(done && done_last), "last done not early");
        @(negedge clk);
        // Tagged done two cycles after the last pair of the third product.
        chk(done && !done_first && done_last, "done with last tag");
        @(negedge clk);
        chk(!done, "done is a pulse");
      end
    // Phase-2 strobe timing at 8b x 8b: p2_en one cycle after each 4th activation BG.
    pw = P8; pi = P8;
    @(negedge clk);
    start = 1; first_i = 1;
    for (int c = 0; c < 18; c++) begin
      @(negedge clk);
      start = 0;
      chk(p2_en == (c == 4 || c == 8 || c == 12 || c == 16), "p2 strobe");
      if (c == 4) chk(p2_en && p2_first, "p2 first strobe");
      if (c == 17) chk(done && done_first, "done with first tag");
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
