// psma_l4: the L4 array, a 4 x 4 grid of L3 units (paper, Fig. 3) combined by the L4
// spatial unrolling (IS, HS or OS) through a share_level. With the paper's 4 x 4 x 4
// hierarchy it holds 4096 L1 multipliers. Combinational apart from the L2 internals of
// bit-serial designs. Widths from psma_pkg::l4_*.
module psma_l4
  import psma_pkg::*;
#(
  parameter config_e CFG = CFG_FU,
  parameter bg_e     BG  = BG_L3,
  parameter share_e  M4  = SH_IS,
  parameter share_e  M3  = SH_OS,
  parameter share_e  M2  = SH_OS,
  localparam int unsigned AB  = l4_act_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned WB  = l4_wgt_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned NO  = l4_nout(CFG, BG, M4, M3, M2),
  localparam int unsigned OW  = bits_for(l4_max(CFG, BG, M4, M3, M2)),
  localparam int unsigned SAB = l3_act_bits(CFG, BG, M3, M2),
  localparam int unsigned SWB = l3_wgt_bits(CFG, BG, M3, M2),
  localparam int unsigned SNO = l3_nout(CFG, BG, M3, M2),
  localparam int unsigned SOW = bits_for(l3_max(CFG, BG, M3, M2))
) (
  input  logic          clk,
  input  logic          rst_n,
  input  prec_e         prec_w,
  input  prec_e         prec_i,
  input  logic          bs_p1_en,
  input  logic          bs_p1_first,
  input  logic          bs_p2_en,
  input  logic          bs_p2_first,
  input  logic [AB-1:0] act_i,
  input  logic [WB-1:0] wgt_i,
  output logic [OW-1:0] res_o [NO]
);
  logic [SAB-1:0] sub_act [NUNITS];
  logic [SWB-1:0] sub_wgt [NUNITS];
  logic [SOW-1:0] sub_res [NUNITS][SNO];

  for (genvar u = 0; u < NUNITS; u++) begin : g_l3
    psma_l3 #(.CFG(CFG), .BG(BG), .M3(M3), .M2(M2)) u_l3 (
      .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
      .bs_p1_en(bs_p1_en), .bs_p1_first(bs_p1_first),
      .bs_p2_en(bs_p2_en), .bs_p2_first(bs_p2_first),
      .act_i(sub_act[u]), .wgt_i(sub_wgt[u]), .res_o(sub_res[u])
    );
  end

  share_level #(.MODE(M4), .SI(SAB), .SW(SWB), .SNO(SNO), .SOW(SOW), .OW(OW)) u_sh (
    .act_i(act_i), .wgt_i(wgt_i), .sub_act_o(sub_act), .sub_wgt_o(sub_wgt),
    .sub_res_i(sub_res), .res_o(res_o)
  );
endmodule
