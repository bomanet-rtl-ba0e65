// masked_xnor: masked binary product for the XNOR-POPCOUNT layers.
//
// In the hidden and output layers both the activation and the weight are
// binary, and their product is XNOR(act, w). XNOR with a plain bit is linear,
// so it is applied to share 0 alone: x0 = ~(act0 ^ w), x1 = act1. The product
// bit is then zero-extended to the adder width (upper bits are the public
// constant 0 in both shares) so that the accumulator counts the ones
// (POPCOUNT). Combinational.
// The XNOR-POPCOUNT scheme is the paper's; applying it to one share and the
// zero extension are this design's realisation.
module masked_xnor
  import bomanet_pkg::*;
#(
  parameter int unsigned W = ACC_W_DEF
) (
  input  logic         act0,
  input  logic         act1,
  input  logic         w,
  output logic [W-1:0] out0,
  output logic [W-1:0] out1
);
  assign out0 = {{(W-1){1'b0}}, ~(act0 ^ w)};
  assign out1 = {{(W-1){1'b0}}, act1};
endmodule
