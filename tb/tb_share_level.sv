// tb_share_level: checks the operand broadcast and the accumulation islands of a level
// in IS, HS and OS mode. Sub-unit results are driven with random values by the
// testbench; expected slices and island sums are computed from the sharing rules.
module tb_share_level;
  import psma_pkg::*;
  int checks = 0, failures = 0;

  // IS: activations 4 x 2b, weights 4 x 2b, 16 outputs.
  logic [7:0]  a_is, w_is;
  logic [1:0]  sa_is [16], sw_is [16];
  logic [3:0]  r_is  [16][1];
  logic [3:0]  o_is  [16];
  share_level #(.MODE(SH_IS), .SI(2), .SW(2), .SNO(1), .SOW(4), .OW(4)) u_is (
    .act_i(a_is), .wgt_i(w_is), .sub_act_o(sa_is), .sub_wgt_o(sw_is), .sub_res_i(r_is), .res_o(o_is));

  // HS: activations 4 x 2b, weights 16 x 2b, 4 outputs (two slots per sub-unit).
  logic [7:0]  a_hs;
  logic [31:0] w_hs;
  logic [1:0]  sa_hs [16], sw_hs [16];
  logic [3:0]  r_hs  [16][2];
  logic [5:0]  o_hs  [8];
  share_level #(.MODE(SH_HS), .SI(2), .SW(2), .SNO(2), .SOW(4), .OW(6)) u_hs (
    .act_i(a_hs), .wgt_i(w_hs), .sub_act_o(sa_hs), .sub_wgt_o(sw_hs), .sub_res_i(r_hs), .res_o(o_hs));

  // OS: activations and weights 16 x 2b, 1 output.
  logic [31:0] a_os, w_os;
  logic [1:0]  sa_os [16], sw_os [16];
  logic [3:0]  r_os  [16][1];
  logic [7:0]  o_os  [1];
  share_level #(.MODE(SH_OS), .SI(2), .SW(2), .SNO(1), .SOW(4), .OW(8)) u_os (
    .act_i(a_os), .wgt_i(w_os), .sub_act_o(sa_os), .sub_wgt_o(sw_os), .sub_res_i(r_os), .res_o(o_os));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 50; t++) begin
      int s [8];
      int so;
      a_is = 8'($urandom); w_is = 8'($urandom);
      a_hs = 8'($urandom); w_hs = $urandom;
      a_os = $urandom;     w_os = $urandom;
      for (int u = 0; u < 16; u++) begin
        r_is[u][0] = 4'($urandom); r_os[u][0] = 4'($urandom);
        r_hs[u][0] = 4'($urandom); r_hs[u][1] = 4'($urandom);
      end
      #1;
      for (int u = 0; u < 16; u++) begin
        int r, c;
        r = u / 4; c = u % 4;
        chk(sa_is[u] == a_is[2*c +: 2], "IS act");
        chk(sw_is[u] == w_is[2*r +: 2], "IS wgt");
        chk(o_is[u]  == r_is[u][0],     "IS out");
        chk(sa_hs[u] == a_hs[2*c +: 2], "HS act");
        chk(sw_hs[u] == w_hs[2*u +: 2], "HS wgt");
        chk(sa_os[u] == a_os[2*u +: 2], "OS act");
        chk(sw_os[u] == w_os[2*u +: 2], "OS wgt");
      end
      for (int k = 0; k < 8; k++) s[k] = 0;
      so = 0;
      for (int u = 0; u < 16; u++) begin
        s[(u/4)*2]     += r_hs[u][0];
        s[(u/4)*2 + 1] += r_hs[u][1];
        so += r_os[u][0];
      end
      for (int k = 0; k < 8; k++) chk(int'(o_hs[k]) == s[k], "HS island sum");
      chk(int'(o_os[0]) == so, "OS sum");
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
