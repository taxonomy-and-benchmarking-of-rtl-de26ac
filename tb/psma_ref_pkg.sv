// psma_ref_pkg: word-level reference model of the PSMA template for the testbenches.
// It evaluates the array from whole operand words: the BG level decodes packed words
// and multiplies them with `*`, with no bit-group splitting or shifting, so it checks
// the RTL's shift & add trees, gating and bit-serial registers independently. Above
// the BG level it slices packed bits as the sharing rules say; below it, it slices
// word lanes. Configuration is passed in a struct.
package psma_ref_pkg;
  import psma_pkg::*;

  typedef bit               bq_t[$];
  typedef longint unsigned  lq_t[$];

  typedef struct {
    config_e cfg;
    bg_e     bg;
    share_e  m4, m3, m2;
    prec_e   pw, pi;
  } ref_cfg_t;

  function automatic share_e mode_of(ref_cfg_t c, int lvl);
    if (lvl == 4) return c.m4;
    if (lvl == 3) return c.m3;
    if (c.bg == BG_BS) return SH_OS;
    return c.m2;
  endfunction

  function automatic bit is_bg_level(ref_cfg_t c, int lvl);
    if (c.cfg == CFG_SWU) return lvl == 2;
    if (c.bg == BG_L2)   return lvl == 2;
    if (c.bg == BG_L3)   return lvl == 3;
    return lvl == 4;   // bit-serial: 8-bit containers are decoded at the array input
  endfunction

  function automatic longint unsigned bits_val(bq_t b, int unsigned lo, int unsigned n);
    longint unsigned v = 0;
    for (int unsigned i = 0; i < n; i++) if (b[lo + i]) v |= (longint'(1) << i);
    return v;
  endfunction

  function automatic bq_t bslice(bq_t b, int unsigned idx, int unsigned n);
    bq_t r;
    for (int unsigned i = 0; i < n; i++) r.push_back(b[idx*n + i]);
    return r;
  endfunction

  function automatic lq_t lslice(lq_t b, int unsigned idx, int unsigned n);
    lq_t r;
    for (int unsigned i = 0; i < n; i++) r.push_back(b[idx*n + i]);
    return r;
  endfunction

  function automatic lq_t combine(share_e m, lq_t res [16]);
    lq_t o;
    int unsigned sno = res[0].size();
    int unsigned no  = out_slots(m) * sno;
    for (int unsigned i = 0; i < no; i++) o.push_back(0);
    for (int unsigned u = 0; u < 16; u++)
      for (int unsigned k = 0; k < sno; k++)
        case (m)
          SH_IS:   o[u*sno + k]       += res[u][k];
          SH_HS:   o[(u/4)*sno + k]   += res[u][k];
          default: o[k]               += res[u][k];
        endcase
    return o;
  endfunction

  // Word-level evaluation below the BG level (lanes are operand words).
  function automatic lq_t eval_words(ref_cfg_t c, int lvl, lq_t a, lq_t w);
    lq_t r, res [16];
    share_e m;
    int unsigned sa, sw;
    if (lvl == 1) begin
      r.push_back(a[0] * w[0]);
      return r;
    end
    m  = mode_of(c, lvl);
    sa = a.size() / in_slices(m);
    sw = w.size() / w_slices(m);
    for (int u = 0; u < 16; u++)
      res[u] = eval_words(c, lvl - 1, lslice(a, (m == SH_OS) ? u : u % 4, sa),
                                      lslice(w, (m == SH_IS) ? u / 4 : u, sw));
    return combine(m, res);
  endfunction

  // Bit-level evaluation at and above the BG level.
  function automatic lq_t eval_bits(ref_cfg_t c, int lvl, bq_t a, bq_t w);
    lq_t r, res [16];
    share_e m;
    int unsigned sa, sw;
    if (lvl == 1) begin  // a single L1: 2b x 2b
      r.push_back(bits_val(a, 0, 2) * bits_val(w, 0, 2));
      return r;
    end
    m = mode_of(c, lvl);
    if (is_bg_level(c, lvl)) begin
      if (c.bg == BG_BS && c.cfg == CFG_FU) begin
        // 8-bit containers hold one word each (value in the low pw/pi bits).
        lq_t wa, ww;
        for (int unsigned j = 0; j < a.size()/8; j++) wa.push_back(bits_val(a, 8*j, prec_bits(c.pi)));
        for (int unsigned j = 0; j < w.size()/8; j++) ww.push_back(bits_val(w, 8*j, prec_bits(c.pw)));
        return eval_words(c, lvl, wa, ww);
      end else if (c.cfg == CFG_SWU) begin
        int unsigned p = prec_bits(c.pw), n = 8 / p;
        lq_t wi, wwq;
        for (int unsigned j = 0; j < n; j++) begin
          wi.push_back(bits_val(a, j*p, p));
          wwq.push_back(bits_val(w, j*p, p));
        end
        if (m == SH_IS) begin
          for (int unsigned k = 0; k < 4; k++) r.push_back(k < n ? wi[k] * wwq[k] : 0);
        end else begin
          r.push_back(0);
          for (int unsigned k = 0; k < n; k++) r[0] += wwq[k] * wi[n-1-k];
        end
        return r;
      end else begin
        int unsigned pw = prec_bits(c.pw), pi = prec_bits(c.pi);
        int unsigned bw = nbg(c.pw), bi = nbg(c.pi);
        int unsigned nbr = 4 / bw, nbc = 4 / bi;
        int unsigned ei = a.size() / (in_slices(m) * 2), ew = w.size() / (w_slices(m) * 2);
        int unsigned nblk = nbr * nbc, eo;
        lq_t wa, ww, br [16];
        for (int unsigned j = 0; j < a.size()/pi; j++) wa.push_back(bits_val(a, j*pi, pi));
        for (int unsigned j = 0; j < w.size()/pw; j++) ww.push_back(bits_val(w, j*pw, pw));
        for (int unsigned b = 0; b < 16; b++) begin
          int unsigned rb = b / 4, cb = b % 4, ia, iw;
          if (b < nblk) begin
            rb = b / nbc; cb = b % nbc;
            case (m)
              SH_IS:   begin ia = cb;          iw = rb;          end
              SH_HS:   begin ia = cb;          iw = rb*nbc + cb; end
              default: begin ia = rb*nbc + cb; iw = rb*nbc + cb; end
            endcase
            br[b] = eval_words(c, lvl - 1, lslice(wa, ia, ei), lslice(ww, iw, ew));
          end
        end
        eo = br[0].size();
        for (int unsigned i = 0; i < out_slots(m) * eo; i++) r.push_back(0);
        for (int unsigned b = 0; b < nblk; b++) begin
          int unsigned rb = b / nbc, cb = b % nbc, o;
          case (m)
            SH_IS:   o = rb*nbc + cb;
            SH_HS:   o = rb;
            default: o = 0;
          endcase
          for (int unsigned k = 0; k < eo; k++) r[o*eo + k] += br[b][k];
        end
        return r;
      end
    end
    sa = a.size() / in_slices(m);
    sw = w.size() / w_slices(m);
    for (int u = 0; u < 16; u++)
      res[u] = eval_bits(c, lvl - 1, bslice(a, (m == SH_OS) ? u : u % 4, sa),
                                     bslice(w, (m == SH_IS) ? u / 4 : u, sw));
    return combine(m, res);
  endfunction

  // Random operand bits of the given width; for bit-serial designs each 8-bit
  // container holds one word of precision p in its low bits.
  function automatic bq_t rand_bits(int unsigned n, bit containers, prec_e p);
    bq_t b;
    for (int unsigned i = 0; i < n; i++)
      b.push_back(containers && (i % 8) >= prec_bits(p) ? 1'b0 : 1'($urandom));
    return b;
  endfunction
endpackage
