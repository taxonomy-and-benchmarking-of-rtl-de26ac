// tb_psma_top: end-to-end test of psma_top at its default parameters (the full-size
// 4096-multiplier array, L4 IS / L3 OS / FU / BG at L3 / L2 OS). psma_driver streams
// random operand sets at every precision pair, checks every accumulated output against
// the word-level reference model and checks one set per cycle.
module tb_psma_top;
  import psma_pkg::*;
  localparam int unsigned AB = l4_act_bits(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS);
  localparam int unsigned WB = l4_wgt_bits(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS);
  localparam int unsigned NO = l4_nout(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS);
  localparam int unsigned AW = bits_for(l4_max(CFG_FU, BG_L3, SH_IS, SH_OS, SH_OS)) + ACC_HEADROOM;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_ready, first, last, out_valid, finished;
  prec_e prec_w, prec_i;
  logic [AB-1:0] act;
  logic [WB-1:0] wgt;
  logic [AW-1:0] out_o [NO];
  int checks, failures;

  psma_top u_dut (
    .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
    .in_valid(in_valid), .in_ready(in_ready), .act_i(act), .wgt_i(wgt),
    .first_i(first), .last_i(last), .out_valid(out_valid), .out_o(out_o)
  );

  psma_driver #(.NACC(3)) u_drv (
    .clk(clk), .rst_n(rst_n), .prec_w(prec_w), .prec_i(prec_i),
    .in_valid(in_valid), .in_ready(in_ready), .act(act), .wgt(wgt),
    .first(first), .last(last), .out_valid(out_valid), .out_o(out_o),
    .checks(checks), .failures(failures), .finished(finished)
  );

  initial begin
    @(posedge clk);
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
