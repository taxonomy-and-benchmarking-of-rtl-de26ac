// l1_mult: the L1 building block of the array, an unsigned 2b x 2b multiplier
// with a 4-bit product (paper, Fig. 3). Purely combinational. A low `en` forces the
// product to zero; the sub-word unrolled L2 uses it to gate idle multipliers (the
// paper gates them; operand zeroing as the gating method is this design's choice).
module l1_mult (
  input  logic       en,
  input  logic [1:0] a,   // weight bit-group
  input  logic [1:0] b,   // activation bit-group
  output logic [3:0] p
);
  always_comb p = en ? ({2'b00, a} * {2'b00, b}) : 4'd0;
endmodule
