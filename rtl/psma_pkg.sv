// psma_pkg: types, constants and width functions shared by the precision-scalable
// MAC array (PSMA) template.
//
// The array is built from 2b x 2b multipliers (L1). Sixteen L1 form an L2 unit,
// sixteen L2 an L3 unit and sixteen L3 the L4 array, each level being a 4 x 4 grid
// (rows r = 0..3, columns c = 0..3). Each level spatially unrolls either input
// sharing (IS), hybrid sharing (HS) or output sharing (OS). Bit-group (BG) loops are
// unrolled at L2, at L3 or temporally (bit-serial, internal registers at L2). The
// configuration is either fully unrolled (FU) or sub-word unrolled (SWU). All of this
// follows the paper's taxonomy; the numeric encodings below are this design's own.
//
// Operand packing convention (this design's choice): a level receives its
// activations and weights as packed bit vectors. At precision p (2, 4 or 8 bits) word
// j occupies bits [j*p +: p]. Weights enter along the rows (left side of a grid),
// activations along the columns (top side). Operands are unsigned.
package psma_pkg;

  // Spatial unrolling at one level (paper: IS, HS, OS).
  typedef enum logic [1:0] {SH_IS = 2'd0, SH_HS = 2'd1, SH_OS = 2'd2} share_e;

  // Where the BG loops are unrolled (paper: L2, L3, or bit-serial with registers at L2).
  typedef enum logic [1:0] {BG_L2 = 2'd0, BG_L3 = 2'd1, BG_BS = 2'd2} bg_e;

  // I/O bandwidth versus utilisation trade-off (paper: FU or SWU).
  typedef enum logic {CFG_FU = 1'b0, CFG_SWU = 1'b1} config_e;

  // Run-time precision of one operand (8, 4 or 2 bits).
  typedef enum logic [1:0] {P8 = 2'd0, P4 = 2'd1, P2 = 2'd2} prec_e;

  localparam int unsigned GRID    = 4;   // 4 x 4 units per level
  localparam int unsigned NUNITS  = 16;  // units per level
  localparam int unsigned WORD_W  = 8;   // full operand precision
  localparam int unsigned ACC_HEADROOM = 4; // extra accumulator bits (paper, Sec. IV-C)

  // Number of 2-bit groups in an operand of the given precision: 4, 2 or 1.
  function automatic int unsigned nbg(prec_e p);
    case (p)
      P8:      return 4;
      P4:      return 2;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned prec_bits(prec_e p);
    return 2 * nbg(p);
  endfunction

  // Packed-input multiplier of a level: how many sub-unit slices it needs.
  function automatic int unsigned in_slices(share_e m);
    return (m == SH_OS) ? 16 : 4;
  endfunction

  function automatic int unsigned w_slices(share_e m);
    return (m == SH_IS) ? 4 : 16;
  endfunction

  // Output slots produced per output slot of a sub-unit.
  function automatic int unsigned out_slots(share_e m);
    case (m)
      SH_IS:   return 16;
      SH_HS:   return 4;
      default: return 1;
    endcase
  endfunction

  // Number of sub-unit results added into one output.
  function automatic int unsigned island_size(share_e m);
    case (m)
      SH_IS:   return 1;
      SH_HS:   return 4;
      default: return 16;
    endcase
  endfunction

  // Bits needed to hold values up to maxv.
  function automatic int unsigned bits_for(longint unsigned maxv);
    int unsigned b;
    b = 1;
    while ((longint'(1) << b) <= maxv) b++;
    return b;
  endfunction

  // Largest value of a BG-unrolled level output (all precision pairs considered),
  // given the largest value an element can produce for one BG pair.
  function automatic longint unsigned bg_level_max(share_e m, longint unsigned emax);
    longint unsigned best, v, sw, si;
    int unsigned bw, bi, blocks;
    best = 0;
    for (int a = 0; a < 3; a++) begin
      for (int b = 0; b < 3; b++) begin
        bw = (a == 0) ? 4 : (a == 1) ? 2 : 1;
        bi = (b == 0) ? 4 : (b == 1) ? 2 : 1;
        sw = ((longint'(1) << (2 * bw)) - 1) / 3;  // sum of 4^k, k < bw
        si = ((longint'(1) << (2 * bi)) - 1) / 3;
        case (m)
          SH_IS:   blocks = 1;
          SH_HS:   blocks = 4 / bi;
          default: blocks = (4 / bw) * (4 / bi);
        endcase
        v = emax * sw * si * blocks;
        if (v > best) best = v;
      end
    end
    return best;
  endfunction

  // ---- Widths of the units of a configuration ------------------------------------
  // L2 unit: packed activation / weight bits, result slots and largest result.
  function automatic int unsigned l2_act_bits(config_e cfg, bg_e bg, share_e m2);
    if (cfg == CFG_SWU) return WORD_W;
    if (bg == BG_BS)    return 2 * NUNITS;
    return 2 * in_slices(m2);
  endfunction

  function automatic int unsigned l2_wgt_bits(config_e cfg, bg_e bg, share_e m2);
    if (cfg == CFG_SWU) return WORD_W;
    if (bg == BG_BS)    return 2 * NUNITS;
    return 2 * w_slices(m2);
  endfunction

  function automatic int unsigned l2_nout(config_e cfg, bg_e bg, share_e m2);
    if (cfg == CFG_SWU) return (m2 == SH_IS) ? 4 : 1;
    if (bg == BG_BS)    return 1;
    return out_slots(m2);
  endfunction

  function automatic longint unsigned l2_max(config_e cfg, bg_e bg, share_e m2);
    if (cfg == CFG_SWU) return 64'd65025;                 // one 8b x 8b product
    if (bg == BG_BS)    return 64'd16 * 64'd65025;        // 16 8b x 8b products
    if (bg == BG_L2)    return bg_level_max(m2, 64'd9);
    return 64'd9 * island_size(m2);                       // 2b x 2b products only
  endfunction

  function automatic int unsigned l2_ow(config_e cfg, bg_e bg, share_e m2);
    if (bg == BG_BS && cfg == CFG_FU) return 20;          // Fig. 8: 20 b phase-2 register
    return bits_for(l2_max(cfg, bg, m2));
  endfunction

  // L3 unit.
  function automatic int unsigned l3_act_bits(config_e cfg, bg_e bg, share_e m3, share_e m2);
    return in_slices(m3) * l2_act_bits(cfg, bg, m2);
  endfunction

  function automatic int unsigned l3_wgt_bits(config_e cfg, bg_e bg, share_e m3, share_e m2);
    return w_slices(m3) * l2_wgt_bits(cfg, bg, m2);
  endfunction

  function automatic int unsigned l3_nout(config_e cfg, bg_e bg, share_e m3, share_e m2);
    return out_slots(m3) * l2_nout(cfg, bg, m2);
  endfunction

  function automatic longint unsigned l3_max(config_e cfg, bg_e bg, share_e m3, share_e m2);
    if (cfg == CFG_FU && bg == BG_L3) return bg_level_max(m3, l2_max(cfg, bg, m2));
    return l2_max(cfg, bg, m2) * island_size(m3);
  endfunction

  // L4 array.
  function automatic int unsigned l4_act_bits(config_e cfg, bg_e bg, share_e m4, share_e m3, share_e m2);
    return in_slices(m4) * l3_act_bits(cfg, bg, m3, m2);
  endfunction

  function automatic int unsigned l4_wgt_bits(config_e cfg, bg_e bg, share_e m4, share_e m3, share_e m2);
    return w_slices(m4) * l3_wgt_bits(cfg, bg, m3, m2);
  endfunction

  function automatic int unsigned l4_nout(config_e cfg, bg_e bg, share_e m4, share_e m3, share_e m2);
    return out_slots(m4) * l3_nout(cfg, bg, m3, m2);
  endfunction

  function automatic longint unsigned l4_max(config_e cfg, bg_e bg, share_e m4, share_e m3, share_e m2);
    return l3_max(cfg, bg, m3, m2) * island_size(m4);
  endfunction

endpackage
