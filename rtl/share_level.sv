// share_level: the operand distribution network and adder tree of one array level
// (L2, L3 or L4) whose 4 x 4 sub-units are combined by plain spatial unrolling, i.e.
// a level at which no bit-group loop is unrolled (paper, Sec. III-B and Fig. 4).
//
// Sub-unit (r,c) sits in row r and column c. Weights enter along rows, activations
// along columns. Per MODE:
//   IS: activation slice c (shared down column c), weight slice r (shared along
//       row r); each sub-unit result is a separate output (16 x SNO slots).
//   HS: activation slice c (shared down column c), a private weight slice per
//       sub-unit; the four results of a row form one accumulation island (4 x SNO).
//   OS: private activation and weight slices; all 16 results are added (SNO slots).
// Result slot k of every sub-unit is added element-wise into slot k of its island.
// The level is combinational. The sharing rules follow the paper; the slice order
// (row-major, r*4+c) is this design's choice.
module share_level
  import psma_pkg::*;
#(
  parameter share_e      MODE = SH_OS,
  parameter int unsigned SI   = 2,    // activation bits per sub-unit
  parameter int unsigned SW   = 2,    // weight bits per sub-unit
  parameter int unsigned SNO  = 1,    // result slots per sub-unit
  parameter int unsigned SOW  = 4,    // result slot width of a sub-unit
  parameter int unsigned OW   = SOW + ((MODE == SH_IS) ? 0 : (MODE == SH_HS) ? 2 : 4),
  localparam int unsigned IN_BITS = in_slices(MODE) * SI,
  localparam int unsigned W_BITS  = w_slices(MODE) * SW,
  localparam int unsigned NO      = out_slots(MODE) * SNO
) (
  input  logic [IN_BITS-1:0] act_i,
  input  logic [W_BITS-1:0]  wgt_i,
  output logic [SI-1:0]      sub_act_o [NUNITS],
  output logic [SW-1:0]      sub_wgt_o [NUNITS],
  input  logic [SOW-1:0]     sub_res_i [NUNITS][SNO],
  output logic [OW-1:0]      res_o     [NO]
);
  // Operand distribution (wiring only).
  for (genvar r = 0; r < GRID; r++) begin : g_row
    for (genvar c = 0; c < GRID; c++) begin : g_col
      localparam int unsigned U  = r * GRID + c;
      localparam int unsigned IA = (MODE == SH_OS) ? U : c;
      localparam int unsigned IW = (MODE == SH_IS) ? r : U;
      assign sub_act_o[U] = act_i[IA*SI +: SI];
      assign sub_wgt_o[U] = wgt_i[IW*SW +: SW];
    end
  end

  // Accumulation islands.
  always_comb begin
    for (int o = 0; o < NO; o++) res_o[o] = '0;
    for (int u = 0; u < NUNITS; u++) begin
      for (int k = 0; k < SNO; k++) begin
        case (MODE)
          SH_IS:   res_o[u*SNO + k]          = OW'(sub_res_i[u][k]);
          SH_HS:   res_o[(u/GRID)*SNO + k]   = res_o[(u/GRID)*SNO + k] + OW'(sub_res_i[u][k]);
          default: res_o[k]                  = res_o[k] + OW'(sub_res_i[u][k]);
        endcase
      end
    end
  end
endmodule
