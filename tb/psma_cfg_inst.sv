// psma_cfg_inst: one psma_top of the given configuration with its psma_driver, for
// testbenches that check several points of the design space side by side.
module psma_cfg_inst
  import psma_pkg::*;
#(
  parameter config_e CFG = CFG_FU,
  parameter bg_e     BG  = BG_L3,
  parameter share_e  M4  = SH_IS,
  parameter share_e  M3  = SH_OS,
  parameter share_e  M2  = SH_OS,
  localparam bit          IS_BS = (BG == BG_BS),
  localparam int unsigned AB  = l4_act_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned WB  = l4_wgt_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned TAB = IS_BS ? 4 * AB : AB,
  localparam int unsigned TWB = IS_BS ? 4 * WB : WB,
  localparam int unsigned NO  = l4_nout(CFG, BG, M4, M3, M2),
  localparam int unsigned AW  = bits_for(l4_max(CFG, BG, M4, M3, M2)) + ACC_HEADROOM
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished
);
  logic rst_n, in_valid, in_ready, first, last, out_valid;
  prec_e prec_w, prec_i;
  logic [TAB-1:0] act;
  logic [TWB-1:0] wgt;
  logic [AW-1:0]  out_o [NO];

  psma_top #(.CFG(CFG), .BG(BG), .M4(M4), .M3(M3), .M2(M2)) u_dut (
    .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
    .in_valid(in_valid), .in_ready(in_ready), .act_i(act), .wgt_i(wgt),
    .first_i(first), .last_i(last), .out_valid(out_valid), .out_o(out_o)
  );

  psma_driver #(.CFG(CFG), .BG(BG), .M4(M4), .M3(M3), .M2(M2), .NACC(3)) u_drv (
    .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
    .in_valid(in_valid), .in_ready(in_ready), .act(act), .wgt(wgt),
    .first(first), .last(last), .out_valid(out_valid), .out_o(out_o),
    .checks(checks), .failures(failures), .finished(finished)
  );
endmodule
