// tb_psma_l2_swu: checks the sub-word unrolled L2 at 8, 4 and 2 bits. No sharing:
// slot k must be weight word k times activation word k. OS: the dot product in which
// weight word k meets activation word n-1-k (the pairing of the hardwired shifters).
module tb_psma_l2_swu;
  import psma_pkg::*;
  int checks = 0, failures = 0;
  prec_e p;
  logic [7:0] a, w;
  logic [15:0] o_is [4], o_os [1];
  psma_l2_swu #(.MODE(SH_IS)) u_is (.prec(p), .act_i(a), .wgt_i(w), .res_o(o_is));
  psma_l2_swu #(.MODE(SH_OS)) u_os (.prec(p), .act_i(a), .wgt_i(w), .res_o(o_os));
  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    for (int x = 0; x < 3; x++)
      for (int t = 0; t < 200; t++) begin
        int q, n, dot, wi [4], ai [4];
        p = ps[x]; q = prec_bits(p); n = 8 / q;
        a = 8'($urandom); w = 8'($urandom);
        #1;
        dot = 0;
        for (int k = 0; k < n; k++) begin
          wi[k] = int'((w >> (k*q)) & ((1 << q) - 1));
          ai[k] = int'((a >> (k*q)) & ((1 << q) - 1));
        end
        for (int k = 0; k < n; k++) dot += wi[k] * ai[n-1-k];
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (int'(o_is[k]) != (k < n ? wi[k] * ai[k] : 0)) begin
            failures++; if (failures < 10) $display("IS %s slot %0d got %0d", p.name(), k, o_is[k]);
          end
        end
        checks++;
        if (int'(o_os[0]) != dot) begin
          failures++; if (failures < 10) $display("OS %s got %0d exp %0d", p.name(), o_os[0], dot);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
