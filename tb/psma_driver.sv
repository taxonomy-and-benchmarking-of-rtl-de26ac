// psma_driver: stimulus and checking for one psma_top instance of a given
// configuration. For every precision pair it streams NACC random operand sets into one
// accumulation (first ... last), predicts the accumulated outputs with psma_ref_pkg and
// compares every output slot when out_valid pulses. It also checks the issue rate:
// one set per cycle for parallel designs, one per bw*bi cycles for bit-serial ones.
// It counts the mechanisms it exercised (precision switches, multi-set accumulation,
// bit-serial stalls, SWU gating) and counts a failure for an applicable one that never
// happened. Results are reported through the checks/failures outputs and `finished`.
module psma_driver
  import psma_pkg::*;
  import psma_ref_pkg::*;
#(
  parameter config_e CFG  = CFG_FU,
  parameter bg_e     BG   = BG_L3,
  parameter share_e  M4   = SH_IS,
  parameter share_e  M3   = SH_OS,
  parameter share_e  M2   = SH_OS,
  parameter int      NACC = 3,
  localparam bit          IS_BS = (BG == BG_BS),
  localparam int unsigned AB  = l4_act_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned WB  = l4_wgt_bits(CFG, BG, M4, M3, M2),
  localparam int unsigned TAB = IS_BS ? 4 * AB : AB,
  localparam int unsigned TWB = IS_BS ? 4 * WB : WB,
  localparam int unsigned NO  = l4_nout(CFG, BG, M4, M3, M2),
  localparam int unsigned OW  = bits_for(l4_max(CFG, BG, M4, M3, M2)),
  localparam int unsigned AW  = OW + ACC_HEADROOM
) (
  input  logic           clk,
  output logic           rst_n,
  output prec_e          prec_w,
  output prec_e          prec_i,
  output logic           in_valid,
  input  logic           in_ready,
  output logic [TAB-1:0] act,
  output logic [TWB-1:0] wgt,
  output logic           first,
  output logic           last,
  input  logic           out_valid,
  input  logic [AW-1:0]  out_o [NO],
  output int             checks,
  output int             failures,
  output bit             finished
);
  longint cycle;
  always_ff @(posedge clk) cycle <= cycle + 1;
  initial cycle = 0;

  int n_switch, n_multi, n_stall, n_gated, n_precs;

  task automatic run_prec(prec_e pw, prec_e pi);
    ref_cfg_t c;
    lq_t exp, r;
    bq_t a, w;
    longint t_first, t_last, expect_gap;
    int wait_cnt;
    c.cfg = CFG; c.bg = BG; c.m4 = M4; c.m3 = M3; c.m2 = M2; c.pw = pw; c.pi = pi;
    @(negedge clk);
    if (prec_w != pw || prec_i != pi) n_switch++;
    prec_w = pw; prec_i = pi;
    repeat (2) @(negedge clk);
    exp = {};
    for (int s = 0; s < NACC; s++) begin
      a = rand_bits(TAB, IS_BS, pi);
      w = rand_bits(TWB, IS_BS, pw);
      r = eval_bits(c, 4, a, w);
      if (s == 0) exp = r;
      else for (int k = 0; k < r.size(); k++) exp[k] += r[k];
      for (int i = 0; i < TAB; i++) act[i] = a[i];
      for (int i = 0; i < TWB; i++) wgt[i] = w[i];
      in_valid = 1'b1; first = (s == 0); last = (s == NACC - 1);
      while (!in_ready) begin n_stall++; @(negedge clk); end
      if (s == 0) t_first = cycle;
      if (s == NACC - 1) t_last = cycle;
      @(negedge clk);
    end
    in_valid = 1'b0; first = 1'b0; last = 1'b0;
    if (NACC > 1) n_multi++;
    if (CFG == CFG_SWU && pw != P8) n_gated++;
    // Issue rate.
    expect_gap = IS_BS ? longint'((NACC - 1) * nbg(pw) * nbg(pi)) : longint'(NACC - 1);
    checks++;
    if (t_last - t_first != expect_gap) begin
      failures++;
      $display("rate: pw=%s pi=%s gap %0d expected %0d", pw.name(), pi.name(), t_last - t_first, expect_gap);
    end
    wait_cnt = 0;
    while (!out_valid && wait_cnt < 100) begin @(negedge clk); wait_cnt++; end
    checks++;
    if (!out_valid) begin
      failures++;
      $display("no out_valid for pw=%s pi=%s", pw.name(), pi.name());
    end else begin
      for (int k = 0; k < NO; k++) begin
        longint unsigned e = (k < exp.size()) ? exp[k] : 0;
        checks++;
        if (64'(out_o[k]) != (e & ((longint'(1) << AW) - 1))) begin
          failures++;
          if (failures < 10)
            $display("mismatch pw=%s pi=%s slot %0d: got %0d expected %0d",
                     pw.name(), pi.name(), k, out_o[k], e);
        end
      end
    end
    n_precs++;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    n_switch = 0; n_multi = 0; n_stall = 0; n_gated = 0; n_precs = 0;
    rst_n = 1'b0; in_valid = 1'b0; first = 1'b0; last = 1'b0;
    act = '0; wgt = '0; prec_w = P8; prec_i = P8;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    if (CFG == CFG_SWU) begin
      run_prec(P8, P8); run_prec(P4, P4); run_prec(P2, P2); run_prec(P8, P8);
    end else begin
      // Paper's modes (8x8, 8x4, 8x2, 4x4, 2x2) plus the remaining pairs.
      run_prec(P8, P8); run_prec(P8, P4); run_prec(P8, P2); run_prec(P4, P4);
      run_prec(P2, P2); run_prec(P4, P8); run_prec(P2, P8); run_prec(P4, P2);
      run_prec(P2, P4); run_prec(P8, P8);
    end
    $display("mechanisms: precision switches=%0d multi-set accumulations=%0d bs stall cycles=%0d swu gated runs=%0d",
             n_switch, n_multi, n_stall, n_gated);
    checks += 2;
    if (n_switch == 0) begin failures++; $display("no precision switch"); end
    if (n_multi == 0)  begin failures++; $display("no multi-set accumulation"); end
    if (IS_BS) begin
      checks++;
      if (n_stall == 0) begin failures++; $display("no bit-serial stall"); end
    end
    if (CFG == CFG_SWU) begin
      checks++;
      if (n_gated == 0) begin failures++; $display("no gated SWU run"); end
    end
    finished = 1;
  end
endmodule
