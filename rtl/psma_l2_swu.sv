// psma_l2_swu: an L2 unit of a sub-word unrolled (SWU) array (paper, Sec. III-E and
// Fig. 6). It keeps the I/O bandwidth fixed at one 8-bit activation container and one
// 8-bit weight container per cycle at every precision, and gates the multipliers it
// cannot use at 4 and 2 bits. Symmetric precision only (paper, Sec. V-A).
//
// Operation. L1 (r,c) always multiplies weight BG r (bits [2r+1:2r]) by activation BG
// 3-c and its product is shifted by the hardwired amount 2*(r + 3 - c), the values
// printed in Fig. 6. The sixteen shifted products feed one fixed adder tree. Which L1
// are active depends on precision and MODE:
//   SH_IS (no sharing): 4b uses the two anti-diagonal 2x2 blocks, 2b the anti-diagonal
//     L1s; products land in disjoint fields of the sum, so result slot k is weight word
//     k times activation word k (fields of 16, 8 or 4 bits).
//   SH_OS: 4b uses the two diagonal 2x2 blocks, 2b the diagonal L1s; the sum is a dot
//     product in which weight word k meets activation word n-1-k (n words), shifted
//     left by 4 (4b) or 6 (2b). This unit shifts it back so slot 0 is LSB aligned; that
//     realignment is this design's choice.
// Gating is modelled as zeroed multiplier operands. Combinational.
module psma_l2_swu
  import psma_pkg::*;
#(
  parameter share_e MODE = SH_OS,
  localparam int unsigned NO = (MODE == SH_IS) ? 4 : 1
) (
  input  prec_e       prec,
  input  logic [7:0]  act_i,
  input  logic [7:0]  wgt_i,
  output logic [15:0] res_o [NO]
);
  logic [3:0]  prod [NUNITS];
  logic        en   [NUNITS];
  logic [15:0] sum;

  always_comb begin
    for (int r = 0; r < GRID; r++) begin
      for (int c = 0; c < GRID; c++) begin
        case (prec)
          P8:      en[r*GRID+c] = 1'b1;
          P4:      en[r*GRID+c] = (MODE == SH_IS) ? ((r/2) + (c/2) == 1) : ((r/2) == (c/2));
          default: en[r*GRID+c] = (MODE == SH_IS) ? (r + c == 3) : (r == c);
        endcase
      end
    end
  end

  for (genvar r = 0; r < GRID; r++) begin : g_row
    for (genvar c = 0; c < GRID; c++) begin : g_col
      l1_mult u_l1 (
        .en (en[r*GRID+c]),
        .a  (wgt_i[2*r +: 2]),
        .b  (act_i[2*(3-c) +: 2]),
        .p  (prod[r*GRID+c])
      );
    end
  end

  // Fixed shift & add tree with hardwired shifters.
  always_comb begin
    sum = '0;
    for (int r = 0; r < GRID; r++)
      for (int c = 0; c < GRID; c++)
        sum = sum + (16'(prod[r*GRID+c]) << (2 * (r + 3 - c)));
  end

  always_comb begin
    for (int o = 0; o < NO; o++) res_o[o] = '0;
    if (MODE == SH_IS) begin
      case (prec)
        P8: res_o[0] = sum;
        P4: for (int o = 0; o < 2; o++) res_o[o] = 16'(sum[8*o +: 8]);
        default: for (int o = 0; o < 4; o++) res_o[o] = 16'(sum[4*o +: 4]);
      endcase
    end else begin
      case (prec)
        P8:      res_o[0] = sum;
        P4:      res_o[0] = sum >> 4;
        default: res_o[0] = sum >> 6;
      endcase
    end
  end
endmodule
