// psma_acc: the output accumulation registers at the periphery of the array (paper,
// Sec. IV-C and Fig. 9). One register per array output slot, each 4 bits wider than
// the array result to leave headroom for temporal accumulation, as in the paper.
// When en is high the register loads the result (first) or adds it. Registers reset to
// zero. The load/add control is this design's choice. One-cycle update.
module psma_acc #(
  parameter int unsigned NO = 16,
  parameter int unsigned IW = 20,
  parameter int unsigned AW = IW + 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  logic [IW-1:0] res_i [NO],
  output logic [AW-1:0] acc_o [NO]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NO; o++) acc_o[o] <= '0;
    end else if (en) begin
      for (int o = 0; o < NO; o++)
        acc_o[o] <= first ? AW'(res_i[o]) : acc_o[o] + AW'(res_i[o]);
    end
  end
endmodule
