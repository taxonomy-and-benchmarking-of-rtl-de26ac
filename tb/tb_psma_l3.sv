// tb_psma_l3: checks L3 units against the word-level reference at all precision
// pairs: the default unit (BG unrolled at L3, L3 OS over output-shared L2s, where the
// L3 holds the configurable shift & add tree) and a unit with BG at L2 and L3 HS.
module tb_psma_l3;
  import psma_pkg::*;
  import psma_ref_pkg::*;
  int checks = 0, failures = 0;
  prec_e pw, pi;

  localparam int unsigned A0 = l3_act_bits(CFG_FU, BG_L3, SH_OS, SH_OS);
  localparam int unsigned W0 = l3_wgt_bits(CFG_FU, BG_L3, SH_OS, SH_OS);
  localparam int unsigned N0 = l3_nout(CFG_FU, BG_L3, SH_OS, SH_OS);
  localparam int unsigned O0 = bits_for(l3_max(CFG_FU, BG_L3, SH_OS, SH_OS));
  localparam int unsigned A1 = l3_act_bits(CFG_FU, BG_L2, SH_HS, SH_OS);
  localparam int unsigned W1 = l3_wgt_bits(CFG_FU, BG_L2, SH_HS, SH_OS);
  localparam int unsigned N1 = l3_nout(CFG_FU, BG_L2, SH_HS, SH_OS);
  localparam int unsigned O1 = bits_for(l3_max(CFG_FU, BG_L2, SH_HS, SH_OS));

  logic [A0-1:0] a0; logic [W0-1:0] w0; logic [O0-1:0] r0 [N0];
  logic [A1-1:0] a1; logic [W1-1:0] w1; logic [O1-1:0] r1 [N1];

  psma_l3 u_l3 (.clk(1'b0), .rst_n(1'b1), .prec_w(pw), .prec_i(pi), .bs_p1_en(1'b0),
    .bs_p1_first(1'b0), .bs_p2_en(1'b0), .bs_p2_first(1'b0), .act_i(a0), .wgt_i(w0), .res_o(r0));
  psma_l3 #(.CFG(CFG_FU), .BG(BG_L2), .M3(SH_HS), .M2(SH_OS)) u_l3b (.clk(1'b0), .rst_n(1'b1),
    .prec_w(pw), .prec_i(pi), .bs_p1_en(1'b0), .bs_p1_first(1'b0), .bs_p2_en(1'b0),
    .bs_p2_first(1'b0), .act_i(a1), .wgt_i(w1), .res_o(r1));

  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++)
        for (int t = 0; t < 10; t++) begin
          ref_cfg_t c;
          bq_t a, w;
          lq_t e;
          pw = ps[x]; pi = ps[y];
          c.cfg = CFG_FU; c.bg = BG_L3; c.m4 = SH_IS; c.m3 = SH_OS; c.m2 = SH_OS; c.pw = pw; c.pi = pi;
          a = rand_bits(A0, 0, pi); w = rand_bits(W0, 0, pw);
          for (int i = 0; i < A0; i++) a0[i] = a[i];
          for (int i = 0; i < W0; i++) w0[i] = w[i];
          #1;
          e = eval_bits(c, 3, a, w);
          for (int k = 0; k < N0; k++) begin
            checks++;
            if (64'(r0[k]) != e[k]) begin
              failures++;
              if (failures < 10) $display("BG@L3 pw=%s pi=%s got %0d exp %0d", pw.name(), pi.name(), r0[k], e[k]);
            end
          end
          c.bg = BG_L2; c.m3 = SH_HS;
          a = rand_bits(A1, 0, pi); w = rand_bits(W1, 0, pw);
          for (int i = 0; i < A1; i++) a1[i] = a[i];
          for (int i = 0; i < W1; i++) w1[i] = w[i];
          #1;
          e = eval_bits(c, 3, a, w);
          for (int k = 0; k < N1; k++) begin
            checks++;
            if (64'(r1[k]) != e[k]) begin
              failures++;
              if (failures < 10) $display("BG@L2 pw=%s pi=%s slot %0d got %0d exp %0d", pw.name(), pi.name(), k, r1[k], e[k]);
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
