// tb_psma_l4: checks the full 4096-multiplier L4 array at its default configuration
// (L4 IS, L3 OS, FU, BG at L3, L2 OS) against the word-level reference at all nine
// precision pairs, combinationally (no registers are involved).
module tb_psma_l4;
  import psma_pkg::*;
  import psma_ref_pkg::*;
  int checks = 0, failures = 0;
  prec_e pw, pi;
  localparam int unsigned AB = l4_act_bits(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS);
  localparam int unsigned WB = l4_wgt_bits(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS);
  localparam int unsigned NO = l4_nout(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS);
  localparam int unsigned OW = bits_for(l4_max(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS));
  logic [AB-1:0] a_v; logic [WB-1:0] w_v; logic [OW-1:0] r [NO];

  psma_l4 u_l4 (.clk(1'b0), .rst_n(1'b1), .prec_w(pw), .prec_i(pi), .bs_p1_en(1'b0),
    .bs_p1_first(1'b0), .bs_p2_en(1'b0), .bs_p2_first(1'b0), .act_i(a_v), .wgt_i(w_v), .res_o(r));

  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++)
        for (int t = 0; t < 4; t++) begin
          ref_cfg_t c;
          bq_t a, w;
          lq_t e;
          pw = ps[x]; pi = ps[y];
          c.cfg = CFG_FU; c.bg = BG_L3; c.m4 = SH_IS; c.m3 = SH_OS; c.m2 = SH_OS; c.pw = pw; c.pi = pi;
          a = rand_bits(AB, 0, pi); w = rand_bits(WB, 0, pw);
          for (int i = 0; i < AB; i++) a_v[i] = a[i];
          for (int i = 0; i < WB; i++) w_v[i] = w[i];
          #1;
          e = eval_bits(c, 4, a, w);
          for (int k = 0; k < NO; k++) begin
            checks++;
            if (64'(r[k]) != e[k]) begin
              failures++;
              if (failures < 10) $display("pw=%s pi=%s slot %0d got %0d exp %0d", pw.name(), pi.name(), k, r[k], e[k]);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
