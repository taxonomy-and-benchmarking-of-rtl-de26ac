// tb_bg_level: checks the BG-unrolled level with 2b x 2b elements (the L2 level of a
// design with BG at L2) in IS, HS and OS mode at all nine precision pairs. The
// elements are modelled in the testbench; expected outputs are whole-word products of
// the packed operands (IS: W[R]*I[C] per block, HS: row sums, OS: one dot product).
module tb_bg_level;
  import psma_pkg::*;
  int checks = 0, failures = 0;
  prec_e pw, pi;

  logic [7:0]  a_is, w_is;   logic [1:0] ea_is [16], ew_is [16]; logic [3:0] er_is [16][1]; logic [15:0] o_is [16];
  logic [7:0]  a_hs; logic [31:0] w_hs; logic [1:0] ea_hs [16], ew_hs [16]; logic [3:0] er_hs [16][1]; logic [15:0] o_hs [4];
  logic [31:0] a_os, w_os;   logic [1:0] ea_os [16], ew_os [16]; logic [3:0] er_os [16][1]; logic [15:0] o_os [1];

  bg_level #(.MODE(SH_IS), .OW(16)) u_is (.prec_w(pw), .prec_i(pi), .act_i(a_is), .wgt_i(w_is),
    .elem_act_o(ea_is), .elem_wgt_o(ew_is), .elem_res_i(er_is), .res_o(o_is));
  bg_level #(.MODE(SH_HS), .OW(16)) u_hs (.prec_w(pw), .prec_i(pi), .act_i(a_hs), .wgt_i(w_hs),
    .elem_act_o(ea_hs), .elem_wgt_o(ew_hs), .elem_res_i(er_hs), .res_o(o_hs));
  bg_level #(.MODE(SH_OS), .OW(16)) u_os (.prec_w(pw), .prec_i(pi), .act_i(a_os), .wgt_i(w_os),
    .elem_act_o(ea_os), .elem_wgt_o(ew_os), .elem_res_i(er_os), .res_o(o_os));

  always_comb
    for (int e = 0; e < 16; e++) begin
      er_is[e][0] = 4'(ea_is[e]) * 4'(ew_is[e]);
      er_hs[e][0] = 4'(ea_hs[e]) * 4'(ew_hs[e]);
      er_os[e][0] = 4'(ea_os[e]) * 4'(ew_os[e]);
    end

  function automatic int word(logic [31:0] v, int j, int p);
    return int'((v >> (j * p)) & ((32'd1 << p) - 1));
  endfunction

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s pw=%s pi=%s got %0d exp %0d", what, pw.name(), pi.name(), got, exp);
    end
  endtask

  initial begin
    prec_e ps [3] = '{P8, P4, P2};
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++)
        for (int t = 0; t < 20; t++) begin
          int qw, qi, nbr, nbc, e_hs [4], e_os;
          pw = ps[x]; pi = ps[y];
          qw = prec_bits(pw); qi = prec_bits(pi);
          nbr = 4 / nbg(pw); nbc = 4 / nbg(pi);
          a_is = 8'($urandom); w_is = 8'($urandom); a_hs = 8'($urandom); w_hs = $urandom;
          a_os = $urandom; w_os = $urandom;
          #1;
          for (int k = 0; k < 16; k++) begin
            int rb, cb;
            rb = k / nbc; cb = k % nbc;
            chk(int'(o_is[k]), (k < nbr * nbc) ? word(w_is, rb, qw) * word(32'(a_is), cb, qi) : 0, "IS");
          end
          e_os = 0;
          for (int r = 0; r < 4; r++) e_hs[r] = 0;
          for (int b = 0; b < nbr * nbc; b++) begin
            e_hs[b / nbc] += word(w_hs, b, qw) * word(32'(a_hs), b % nbc, qi);
            e_os += word(w_os, b, qw) * word(a_os, b, qi);
          end
          for (int r = 0; r < 4; r++) chk(int'(o_hs[r]), e_hs[r], "HS");
          chk(int'(o_os[0]), e_os, "OS");
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
