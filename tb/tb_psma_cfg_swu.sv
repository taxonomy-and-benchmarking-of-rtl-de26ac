// tb_psma_cfg_swu: end-to-end checks of full-size arrays at further points of the design space:
// sub-word unrolled designs: L2 no sharing (L4 OS, L3 HS) and L2 OS (L4 IS, L3 OS, ST-like). Symmetric precisions only.
// Each instance streams random operand sets at every supported precision pair through
// psma_driver, which compares all accumulated outputs with the word-level reference.
module tb_psma_cfg_swu;
  import psma_pkg::*;
  localparam int N = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int chk [N], fail [N];
  bit fin [N];

  psma_cfg_inst #(.CFG(CFG_SWU), .BG(BG_L2), .M4(SH_OS), .M3(SH_HS), .M2(SH_IS)) u0 (clk, chk[0], fail[0], fin[0]);
  psma_cfg_inst #(.CFG(CFG_SWU), .BG(BG_L2), .M4(SH_IS), .M3(SH_OS), .M2(SH_OS)) u1 (clk, chk[1], fail[1], fin[1]);

  initial begin
    int c, f;
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < N; i++) all &= fin[i];
    end while (!all);
    c = 0; f = 0;
    for (int i = 0; i < N; i++) begin
      $display("config %0d: checks=%0d failures=%0d", i, chk[i], fail[i]);
      c += chk[i]; f += fail[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    int c, f;
    repeat (20000) @(posedge clk);
    c = 0; f = 1;
    for (int i = 0; i < N; i++) begin c += chk[i]; f += fail[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
