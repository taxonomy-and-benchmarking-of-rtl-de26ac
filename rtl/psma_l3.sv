// psma_l3: one L3 unit, a 4 x 4 grid of L2 units (paper, Fig. 3). When the BG loops
// are unrolled at L3 (FU only) the L3 level is a bg_level whose elements are the L2
// units and it holds the configurable shift & add tree (paper, Sec. IV-A, Fig. 7);
// otherwise it is a share_level that distributes operands and adds results by the
// L3 spatial unrolling (IS, HS or OS). Combinational apart from the L2 internals of
// bit-serial designs. Interface as psma_l2, with widths from psma_pkg::l3_*.
module psma_l3
  import psma_pkg::*;
#(
  parameter config_e CFG = CFG_FU,
  parameter bg_e     BG  = BG_L3,
  parameter share_e  M3  = SH_OS,
  parameter share_e  M2  = SH_OS,
  localparam int unsigned AB  = l3_act_bits(CFG, BG, M3, M2),
  localparam int unsigned WB  = l3_wgt_bits(CFG, BG, M3, M2),
  localparam int unsigned NO  = l3_nout(CFG, BG, M3, M2),
  localparam int unsigned OW  = bits_for(l3_max(CFG, BG, M3, M2)),
  localparam int unsigned SAB = l2_act_bits(CFG, BG, M2),
  localparam int unsigned SWB = l2_wgt_bits(CFG, BG, M2),
  localparam int unsigned SNO = l2_nout(CFG, BG, M2),
  localparam int unsigned SOW = l2_ow(CFG, BG, M2)
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

  for (genvar u = 0; u < NUNITS; u++) begin : g_l2
    psma_l2 #(.CFG(CFG), .BG(BG), .MODE(M2)) u_l2 (
      .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
      .bs_p1_en(bs_p1_en), .bs_p1_first(bs_p1_first),
      .bs_p2_en(bs_p2_en), .bs_p2_first(bs_p2_first),
      .act_i(sub_act[u]), .wgt_i(sub_wgt[u]), .res_o(sub_res[u])
    );
  end

  if (CFG == CFG_FU && BG == BG_L3) begin : g_bg
    bg_level #(.MODE(M3), .EI(SAB/2), .EW(SWB/2), .EO(SNO), .EOW(SOW),
               .EMAX(l2_max(CFG, BG, M2)), .OW(OW)) u_bg (
      .prec_w(prec_w), .prec_i(prec_i), .act_i(act_i), .wgt_i(wgt_i),
      .elem_act_o(sub_act), .elem_wgt_o(sub_wgt), .elem_res_i(sub_res), .res_o(res_o)
    );
  end else begin : g_sh
    share_level #(.MODE(M3), .SI(SAB), .SW(SWB), .SNO(SNO), .SOW(SOW), .OW(OW)) u_sh (
      .act_i(act_i), .wgt_i(wgt_i), .sub_act_o(sub_act), .sub_wgt_o(sub_wgt),
      .sub_res_i(sub_res), .res_o(res_o)
    );
  end
endmodule
