// bg_level: a fully unrolled (FU) level at which the bit-group (BG) loops are
// unrolled spatially, with a run-time configurable shift & add tree (paper,
// Sec. III-E, IV-A and Figs. 5 and 7). Used as the L2 level when BG is unrolled at
// L2 (elements are L1 multipliers) and as the L3 level when BG is unrolled at L3
// (elements are L2 units that add 2b x 2b products of equal significance).
//
// Operation. With weight precision pw = 2*bw and activation precision pi = 2*bi, the
// 4 x 4 element grid is cut into blocks of bw rows by bi columns. A block computes one
// full-precision product (or, for vector elements, one element-wise vector product):
// element (r,c) takes weight BG rr = r mod bw and activation BG bi-1-(c mod bi) (the
// leftmost column carries the most significant BG, as in Fig. 6) and its result is
// shifted left by 2*(BG_w + BG_i). The (4/bw) x (4/bi) blocks are then combined by MODE
// exactly as sub-units are in share_level: IS keeps them apart, HS adds along block
// rows, OS adds all. At 8b x 8b the whole grid is one block, so the level unrolls no
// other loop; at 2b x 2b every element is its own block.
//
// Interface. act_i/wgt_i are packed words of the current precision (word j at
// [j*p +: p]); words carry EI (EW) element lanes each, word index = block*EI + lane.
// elem_*_o feed the elements and elem_res_i returns their EO result slots.
// Combinational. Precisions must be held stable while results are used.
module bg_level
  import psma_pkg::*;
#(
  parameter share_e      MODE = SH_OS,
  parameter int unsigned EI   = 1,   // activation lanes per element
  parameter int unsigned EW   = 1,   // weight lanes per element
  parameter int unsigned EO   = 1,   // result slots per element
  parameter int unsigned EOW  = 4,   // element result width
  parameter longint unsigned EMAX = 9,  // largest element result
  parameter int unsigned OW   = bits_for(bg_level_max(MODE, EMAX)),
  localparam int unsigned IN_BITS = in_slices(MODE) * 2 * EI,
  localparam int unsigned W_BITS  = w_slices(MODE) * 2 * EW,
  localparam int unsigned NO      = out_slots(MODE) * EO
) (
  input  prec_e               prec_w,
  input  prec_e               prec_i,
  input  logic [IN_BITS-1:0]  act_i,
  input  logic [W_BITS-1:0]   wgt_i,
  output logic [2*EI-1:0]     elem_act_o [NUNITS],
  output logic [2*EW-1:0]     elem_wgt_o [NUNITS],
  input  logic [EOW-1:0]      elem_res_i [NUNITS][EO],
  output logic [OW-1:0]       res_o      [NO]
);
  int unsigned bw, bi, pw, pi;
  always_comb begin
    bw = nbg(prec_w);
    bi = nbg(prec_i);
    pw = 2 * bw;
    pi = 2 * bi;
  end

  // Per-element routing, computed from the run-time precision.
  int unsigned iw_idx [NUNITS];  // activation word (block) index
  int unsigned ww_idx [NUNITS];  // weight word (block) index
  int unsigned os_idx [NUNITS];  // output slot (block) index
  int unsigned bgw    [NUNITS];
  int unsigned bgi    [NUNITS];

  always_comb begin
    int unsigned rb, cb, rr, cc, nbc;
    for (int e = 0; e < NUNITS; e++) begin
      rb  = (e / GRID) / bw;
      rr  = (e / GRID) % bw;
      cb  = (e % GRID) / bi;
      cc  = (e % GRID) % bi;
      nbc = GRID / bi;
      bgw[e] = rr;
      bgi[e] = bi - 1 - cc;
      case (MODE)
        SH_IS: begin
          iw_idx[e] = cb;            ww_idx[e] = rb;            os_idx[e] = rb * nbc + cb;
        end
        SH_HS: begin
          iw_idx[e] = cb;            ww_idx[e] = rb * nbc + cb; os_idx[e] = rb;
        end
        default: begin
          iw_idx[e] = rb * nbc + cb; ww_idx[e] = rb * nbc + cb; os_idx[e] = 0;
        end
      endcase
    end
  end

  always_comb begin
    for (int e = 0; e < NUNITS; e++) begin
      for (int l = 0; l < EI; l++)
        elem_act_o[e][2*l +: 2] = act_i[(iw_idx[e]*EI + l)*pi + 2*bgi[e] +: 2];
      for (int l = 0; l < EW; l++)
        elem_wgt_o[e][2*l +: 2] = wgt_i[(ww_idx[e]*EW + l)*pw + 2*bgw[e] +: 2];
    end
  end

  // Configurable shift & add tree.
  always_comb begin
    for (int o = 0; o < NO; o++) res_o[o] = '0;
    for (int e = 0; e < NUNITS; e++)
      for (int k = 0; k < EO; k++)
        res_o[os_idx[e]*EO + k] = res_o[os_idx[e]*EO + k]
                                + (OW'(elem_res_i[e][k]) << (2 * (bgw[e] + bgi[e])));
  end
endmodule
