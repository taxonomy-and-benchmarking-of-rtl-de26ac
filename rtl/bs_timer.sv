// bs_timer: scheduling ("timer") logic of a bit-serial array (paper, Sec. IV-A and
// Fig. 8(d)). One timer serves all L2 units.
//
// When a set of operand words is accepted (start), the timer walks the bit-group pairs:
// the activation BG index k counts 0..bi-1 fastest, then the weight BG index j counts
// 0..bw-1, so a pw x pi product takes bw*bi cycles (16 at 8b x 8b, 1 at 2b x 2b). The
// next set may be accepted in the cycle of the last pair, so the array stays busy.
// Outputs: BG selects for the operand registers, phase-1 controls for the cycle itself,
// phase-2 controls one cycle later and `done` two cycles after the last pair, when the
// phase-2 registers hold complete products. first/last tags travel with `done` for the
// output accumulators. The two-phase order follows the paper; the cycle-level timing
// is this design's choice. Reset: idle.
module bs_timer
  import psma_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  prec_e      prec_w,
  input  prec_e      prec_i,
  input  logic       start,       // accept a new operand set (must only rise when ready)
  input  logic       first_i,     // tags of the accepted set
  input  logic       last_i,
  output logic       ready,       // a new set can be accepted this cycle
  output logic       busy,
  output logic [1:0] sel_i,       // activation BG index k
  output logic [1:0] sel_w,       // weight BG index j
  output logic       p1_en,
  output logic       p1_first,
  output logic       p2_en,
  output logic       p2_first,
  output logic       done,
  output logic       done_first,
  output logic       done_last
);
  logic [1:0] k, j;
  logic       tag_first, tag_last;
  logic       last_k, last_pair;
  logic       d1, d1_first, d1_last;

  always_comb begin
    last_k    = (32'(k) == nbg(prec_i) - 1);
    last_pair = busy && last_k && (32'(j) == nbg(prec_w) - 1);
    ready     = !busy || last_pair;
    sel_i     = k;
    sel_w     = j;
    p1_en     = busy;
    p1_first  = (k == 2'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; k <= '0; j <= '0; tag_first <= 1'b0; tag_last <= 1'b0;
      p2_en <= 1'b0; p2_first <= 1'b0;
      d1 <= 1'b0; d1_first <= 1'b0; d1_last <= 1'b0;
      done <= 1'b0; done_first <= 1'b0; done_last <= 1'b0;
    end else begin
      if (start && ready) begin
        busy <= 1'b1; k <= '0; j <= '0;
        tag_first <= first_i; tag_last <= last_i;
      end else if (busy) begin
        if (last_pair) busy <= 1'b0;
        else if (last_k) begin k <= '0; j <= j + 2'd1; end
        else k <= k + 2'd1;
      end
      p2_en    <= busy && last_k;
      p2_first <= busy && last_k && (j == 2'd0);
      d1       <= last_pair;
      d1_first <= tag_first;
      d1_last  <= tag_last;
      done       <= d1;
      done_first <= d1_first;
      done_last  <= d1_last;
    end
  end
endmodule
