// bs_shift_add: the two internal shift-add registers of a bit-serial L2 unit (BS-L2),
// paper Sec. IV-A/IV-C and Fig. 8(a).
//
// Each cycle the L2 adder tree delivers an 8-bit sum of sixteen 2b x 2b products for
// one (activation BG, weight BG) pair. Activation BGs arrive LSB first, then the
// weight BG advances (Fig. 8(d)).
//   Phase 1: r1 <= (sum << 6) + (r1 >> 2); the first activation BG of a weight BG
//            loads r1 instead of adding (r1 is 14 b: 8 b + 6 b headroom).
//   Phase 2: in the cycle after the last activation BG, r2 <= (a1 << 6) + (r2 >> 2),
//            the first weight BG loads (r2 is 20 b).
// After bi activation BGs r1 holds the partial product shifted left by 2*(4-bi), and
// after bw weight BGs r2 holds the result shifted by 2*(4-bw). The register structure,
// widths and >>2 feedback follow Fig. 8; the realignment shifts a1 = r1 >> 2*(4-bi) and
// res_o = r2 >> 2*(4-bw), which the figure does not show, are this design's choice.
// Control comes from bs_timer; res_o is the full product in the cycle its `done`
// flag is high. Registers reset to zero.
module bs_shift_add
  import psma_pkg::*;
#(
  parameter int unsigned IN_W = 8,
  localparam int unsigned R1_W = IN_W + 6,
  localparam int unsigned R2_W = R1_W + 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  prec_e           prec_w,
  input  prec_e           prec_i,
  input  logic            p1_en,
  input  logic            p1_first,
  input  logic            p2_en,
  input  logic            p2_first,
  input  logic [IN_W-1:0] sum_i,
  output logic [R2_W-1:0] res_o
);
  logic [R1_W-1:0] r1;
  logic [R2_W-1:0] r2;
  logic [R1_W-1:0] a1;

  always_comb a1 = r1 >> (2 * (4 - nbg(prec_i)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0;
      r2 <= '0;
    end else begin
      if (p1_en) r1 <= (R1_W'(sum_i) << 6) + (p1_first ? '0 : (r1 >> 2));
      if (p2_en) r2 <= (R2_W'(a1) << 6) + (p2_first ? '0 : (r2 >> 2));
    end
  end

  always_comb res_o = r2 >> (2 * (4 - nbg(prec_w)));
endmodule
