// tb_psma_l2: checks the combinational L2 variants against the word-level reference:
// FU with BG at L2 and L2 = IS, HS, OS; FU with BG at L3 and L2 = HS, OS (products of
// equal significance only, checked as 2b operands); SWU with L2 = OS. All precision
// pairs (symmetric ones for SWU). The bit-serial L2 is checked through bs_shift_add
// and the bit-serial end-to-end testbench.
module tb_psma_l2;
  import psma_pkg::*;
  import psma_ref_pkg::*;
  int checks = 0, failures = 0;
  prec_e pw, pi;

  `define L2_INST(NAME, C, B, M) \
    localparam int unsigned NAME``_AB = l2_act_bits(C, B, M); \
    localparam int unsigned NAME``_WB = l2_wgt_bits(C, B, M); \
    localparam int unsigned NAME``_NO = l2_nout(C, B, M); \
    localparam int unsigned NAME``_OW = l2_ow(C, B, M); \
    logic [NAME``_AB-1:0] NAME``_a; \
    logic [NAME``_WB-1:0] NAME``_w; \
    logic [NAME``_OW-1:0] NAME``_r [NAME``_NO]; \
    psma_l2 #(.CFG(C), .BG(B), .MODE(M)) u_``NAME ( \
      .clk(1'b0), .rst_n(1'b1), .prec_w(pw), .prec_i(pi), .bs_p1_en(1'b0), .bs_p1_first(1'b0), \
      .bs_p2_en(1'b0), .bs_p2_first(1'b0), .act_i(NAME``_a), .wgt_i(NAME``_w), .res_o(NAME``_r));

  `L2_INST(v0, CFG_FU,  BG_L2, SH_IS)
  `L2_INST(v1, CFG_FU,  BG_L2, SH_HS)
  `L2_INST(v2, CFG_FU,  BG_L2, SH_OS)
  `L2_INST(v3, CFG_FU,  BG_L3, SH_HS)
  `L2_INST(v4, CFG_FU,  BG_L3, SH_OS)
  `L2_INST(v5, CFG_SWU, BG_L2, SH_OS)

  `define L2_CHECK(NAME, C, B, M) \
    begin \
      ref_cfg_t c; bq_t a, w; lq_t e; \
      c.cfg = C; c.bg = B; c.m4 = SH_IS; c.m3 = SH_IS; c.m2 = M; c.pw = pw; c.pi = pi; \
      a = rand_bits(NAME``_AB, 0, pi); w = rand_bits(NAME``_WB, 0, pw); \
      for (int i = 0; i < NAME``_AB; i++) NAME``_a[i] = a[i]; \
      for (int i = 0; i < NAME``_WB; i++) NAME``_w[i] = w[i]; \
      #1; \
      e = eval_bits(c, 2, a, w); \
      for (int k = 0; k < NAME``_NO; k++) begin \
        checks++; \
        if (64'(NAME``_r[k]) != ((k < e.size()) ? e[k] : 0)) begin \
          failures++; \
          if (failures < 10) $display("%s pw=%s pi=%s slot %0d got %0d exp %0d", `"NAME`", \
                                      pw.name(), pi.name(), k, NAME``_r[k], e[k]); \
        end \
      end \
    end

  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++)
        for (int t = 0; t < 20; t++) begin
          pw = ps[x]; pi = ps[y];
          `L2_CHECK(v0, CFG_FU, BG_L2, SH_IS)
          `L2_CHECK(v1, CFG_FU, BG_L2, SH_HS)
          `L2_CHECK(v2, CFG_FU, BG_L2, SH_OS)
          `L2_CHECK(v3, CFG_FU, BG_L3, SH_HS)
          `L2_CHECK(v4, CFG_FU, BG_L3, SH_OS)
          if (x == y) `L2_CHECK(v5, CFG_SWU, BG_L2, SH_OS)
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
