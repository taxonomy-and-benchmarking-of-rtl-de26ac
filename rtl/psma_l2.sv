// psma_l2: one L2 unit, a 4 x 4 grid of L1 2b x 2b multipliers (paper, Fig. 3), built
// in the variant the design-time parameters select (paper, Table II):
//   FU, BG at L2 : bg_level with L1 elements; a run-time configurable shift & add tree
//                  turns the grid into full-precision multipliers (Fig. 5).
//   FU, BG at L3 : share_level over the L1s; only products of equal significance are
//                  added here, the shifts live in L3 (Fig. 7).
//   FU, BG bit-serial (BS-L2): an output-shared adder tree of the L1s followed by the
//                  two-phase internal shift-add registers (Fig. 8(a)).
//   SWU, BG at L2: psma_l2_swu with hardwired shifters and gated L1s (Fig. 6).
// Interface: packed activations/weights (layout per variant, see the sub-modules),
// NO result slots of OW bits. All variants but BS are combinational; BS results are
// valid when the bs_timer `done` flag is high. The bs_* inputs are unused otherwise.
module psma_l2
  import psma_pkg::*;
#(
  parameter config_e CFG  = CFG_FU,
  parameter bg_e     BG   = BG_L3,
  parameter share_e  MODE = SH_OS,
  localparam int unsigned AB = l2_act_bits(CFG, BG, MODE),
  localparam int unsigned WB = l2_wgt_bits(CFG, BG, MODE),
  localparam int unsigned NO = l2_nout(CFG, BG, MODE),
  localparam int unsigned OW = l2_ow(CFG, BG, MODE)
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
  if (CFG == CFG_SWU) begin : g_swu
    psma_l2_swu #(.MODE(MODE)) u_swu (
      .prec(prec_w), .act_i(act_i), .wgt_i(wgt_i), .res_o(res_o)
    );
  end else begin : g_fu
    logic [1:0] l1_a [NUNITS];
    logic [1:0] l1_b [NUNITS];
    logic [3:0] l1_p [NUNITS][1];

    for (genvar u = 0; u < NUNITS; u++) begin : g_l1
      l1_mult u_l1 (.en(1'b1), .a(l1_a[u]), .b(l1_b[u]), .p(l1_p[u][0]));
    end

    if (BG == BG_L2) begin : g_bg_l2
      bg_level #(.MODE(MODE), .EI(1), .EW(1), .EO(1), .EOW(4), .EMAX(9), .OW(OW)) u_bg (
        .prec_w(prec_w), .prec_i(prec_i), .act_i(act_i), .wgt_i(wgt_i),
        .elem_act_o(l1_b), .elem_wgt_o(l1_a), .elem_res_i(l1_p), .res_o(res_o)
      );
    end else if (BG == BG_L3) begin : g_bg_l3
      share_level #(.MODE(MODE), .SI(2), .SW(2), .SNO(1), .SOW(4), .OW(OW)) u_sh (
        .act_i(act_i), .wgt_i(wgt_i), .sub_act_o(l1_b), .sub_wgt_o(l1_a),
        .sub_res_i(l1_p), .res_o(res_o)
      );
    end else begin : g_bs
      logic [7:0] sum [1];
      share_level #(.MODE(SH_OS), .SI(2), .SW(2), .SNO(1), .SOW(4), .OW(8)) u_sh (
        .act_i(act_i), .wgt_i(wgt_i), .sub_act_o(l1_b), .sub_wgt_o(l1_a),
        .sub_res_i(l1_p), .res_o(sum)
      );
      bs_shift_add #(.IN_W(8)) u_bs (
        .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
        .p1_en(bs_p1_en), .p1_first(bs_p1_first), .p2_en(bs_p2_en), .p2_first(bs_p2_first),
        .sum_i(sum[0]), .res_o(res_o[0])
      );
      // BS-L2 requires an output-shared L2 (paper, Sec. IV-B, constraint 2).
      initial assert (MODE == SH_OS) else $error("BS-L2 requires L2 = OS");
    end
  end
endmodule
