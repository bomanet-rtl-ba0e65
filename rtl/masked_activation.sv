// masked_activation: masked sign activation of a BNN node.
//
// The activation is +1 (encoded 1) for a non-negative sum and -1 (encoded 0)
// for a negative one, i.e. the inverted MSB of the two's-complement sum. With
// the MSB held as two Boolean shares, inverting the value needs only one
// share inverted: act0 = ~msb0, act1 = msb1. Combinational.
// This is the paper's construction.
module masked_activation (
  input  logic msb0,
  input  logic msb1,
  output logic act0,
  output logic act1
);
  assign act0 = ~msb0;
  assign act1 = msb1;
endmodule
