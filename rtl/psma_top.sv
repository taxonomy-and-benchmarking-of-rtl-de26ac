// psma_top: a precision-scalable MAC array (PSMA) built from the paper's uniform,
// design-time parameterised template, with input registers and output accumulators
// at its periphery (paper, Sec. IV-C).
//
// Design-time parameters select one point of the paper's constrained design space
// (Table II): L4 and L3 unrolling (IS/HS/OS), and one of eight config/BG/L2 columns:
// FU with BG at L2 and L2 = IS/HS/OS, FU with BG at L3 and L2 = HS/OS, FU bit-serial
// (BS-L2) with L2 = OS, SWU with L2 = IS (no sharing) or OS. The defaults are L4 IS,
// L3 OS, FU, BG at L3, L2 OS: the BitBlade-like point the paper names among the best
// at 200 MHz. Run-time inputs prec_w/prec_i choose 8, 4 or 2 bits per operand; SWU
// designs need prec_w == prec_i.
//
// Interface. One operand set (act_i, wgt_i) is taken when in_valid && in_ready; its
// packing is given by the levels (see README). first_i starts a new accumulation in
// the output registers and last_i ends it: out_valid pulses with out_o holding the
// accumulated results. prec_w/prec_i must stay constant while sets are in flight.
// Timing: FU/SWU accept one set per cycle (in_ready = 1) and the accumulation of a set
// lands two clock edges after it is taken. Bit-serial designs take 8-bit words on
// every lane, step through the bw*bi bit-group pairs (one pair per cycle) and accept
// the next set in the cycle of the last pair; results land four edges after the last
// pair starts. Reset is asynchronous, active low, and clears all control state.
module psma_top
  import psma_pkg::*;
#(
  parameter config_e CFG = CFG_FU,
  parameter bg_e     BG  = BG_L3,
  parameter share_e  M4  = SH_IS,
  parameter share_e  M3  = SH_OS,
  parameter share_e  M2  = SH_OS,
  localparam bit          IS_BS = (BG == BG_BS),
  localparam int unsigned AB  = l4_act_bits(CFG, BG, M4, M3, M2),  // array lanes
  localparam int unsigned WB  = l4_wgt_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned TAB = IS_BS ? 4 * AB : AB,               // port widths
  localparam int unsigned TWB = IS_BS ? 4 * WB : WB,
  localparam int unsigned NO  = l4_nout(CFG, BG, M4, M3, M2),
  localparam int unsigned OW  = bits_for(l4_max(CFG, BG, M4, M3, M2)),
  localparam int unsigned AW  = OW + ACC_HEADROOM
) (
  input  logic           clk,
  input  logic           rst_n,
  input  prec_e          prec_w,
  input  prec_e          prec_i,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [TAB-1:0] act_i,
  input  logic [TWB-1:0] wgt_i,
  input  logic           first_i,
  input  logic           last_i,
  output logic           out_valid,
  output logic [AW-1:0]  out_o [NO]
);
  // Design-space constraints (paper, Sec. IV-B).
  if (BG == BG_L3 && M2 == SH_IS) begin : g_err_l3
    $error("BG at L3 requires L2 = HS or OS");
  end
  if (BG == BG_BS && (M2 != SH_OS || CFG != CFG_FU)) begin : g_err_bs
    $error("bit-serial designs are FU with L2 = OS (BS-L2)");
  end
  if (CFG == CFG_SWU && (BG != BG_L2 || M2 == SH_HS)) begin : g_err_swu
    $error("SWU designs unroll BG at L2 with L2 = IS (no sharing) or OS");
  end

  logic [TAB-1:0] act_q;
  logic [TWB-1:0] wgt_q;
  logic           vld_q, first_q, last_q;   // tags used by parallel designs
  logic [AB-1:0]  arr_act;
  logic [WB-1:0]  arr_wgt;
  logic [OW-1:0]  arr_res [NO];
  logic           acc_en, acc_first, acc_last;
  logic           take;

  // Bit-serial control.
  logic       t_ready, t_busy, p1_en, p1_first, p2_en, p2_first;
  logic       done, done_first, done_last;
  logic [1:0] sel_i, sel_w;

  assign in_ready = IS_BS ? t_ready : 1'b1;
  assign take     = in_valid && in_ready;

  // Input registers at the array periphery.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= '0; wgt_q <= '0; vld_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
    end else begin
      vld_q <= take;
      if (take) begin
        act_q <= act_i; wgt_q <= wgt_i; first_q <= first_i; last_q <= last_i;
      end
    end
  end

  if (IS_BS) begin : g_bs
    bs_timer u_timer (
      .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
      .start(take), .first_i(first_i), .last_i(last_i),
      .ready(t_ready), .busy(t_busy), .sel_i(sel_i), .sel_w(sel_w),
      .p1_en(p1_en), .p1_first(p1_first), .p2_en(p2_en), .p2_first(p2_first),
      .done(done), .done_first(done_first), .done_last(done_last)
    );
    // Bit-group selection from the held 8-bit words.
    always_comb begin
      for (int l = 0; l < AB/2; l++) arr_act[2*l +: 2] = act_q[8*l + 2*sel_i +: 2];
      for (int l = 0; l < WB/2; l++) arr_wgt[2*l +: 2] = wgt_q[8*l + 2*sel_w +: 2];
    end
    assign acc_en    = done;
    assign acc_first = done_first;
    assign acc_last  = done_last;
  end else begin : g_par
    assign t_ready = 1'b1; assign t_busy = 1'b0;
    assign p1_en = 1'b0; assign p1_first = 1'b0; assign p2_en = 1'b0; assign p2_first = 1'b0;
    assign done = 1'b0; assign done_first = 1'b0; assign done_last = 1'b0;
    assign sel_i = '0; assign sel_w = '0;
    assign arr_act   = act_q;
    assign arr_wgt   = wgt_q;
    assign acc_en    = vld_q;
    assign acc_first = first_q;
    assign acc_last  = last_q;
  end

  psma_l4 #(.CFG(CFG), .BG(BG), .M4(M4), .M3(M3), .M2(M2)) u_array (
    .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
    .bs_p1_en(p1_en), .bs_p1_first(p1_first), .bs_p2_en(p2_en), .bs_p2_first(p2_first),
    .act_i(arr_act), .wgt_i(arr_wgt), .res_o(arr_res)
  );

  psma_acc #(.NO(NO), .IW(OW), .AW(AW)) u_acc (
    .clk(clk), .rst_n(rst_n), .en(acc_en), .first(acc_first), .res_i(arr_res), .acc_o(out_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= acc_en && acc_last;
  end

  // SWU designs scale weights and activations together.
  a_swu_sym: assert property (@(posedge clk) disable iff (!rst_n)
    (CFG == CFG_SWU && vld_q) |-> (prec_w == prec_i));
  // Bit-serial: precisions stay constant while a product is being stepped through.
  a_bs_prec: assert property (@(posedge clk) disable iff (!rst_n)
    (IS_BS && t_busy) |=> ($stable(prec_w) && $stable(prec_i)));
endmodule
