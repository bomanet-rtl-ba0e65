// masked_lut: one 1-bit masked multiplexer cell (4 inputs, 2 outputs).
//
// A look-up of (pos, neg, sel, ri) that returns the selected bit already
// masked, out1 = (sel ? pos : neg) ^ ri, and the mask itself, out0 = ri. On an
// FPGA both functions fit one 6-input LUT with two outputs and the look-up is
// treated as atomic, so the unmasked selected bit never appears on a wire.
// Combinational. Function as in the paper; written as a single expression
// per output.
module masked_lut (
  input  logic pos,
  input  logic neg,
  input  logic sel,
  input  logic ri,
  output logic out1,
  output logic out0
);
  always_comb begin
    unique case ({sel, pos, neg})
      3'b000, 3'b010: out1 = ri;        // sel=0 -> neg = 0
      3'b001, 3'b011: out1 = ~ri;       // sel=0 -> neg = 1
      3'b100, 3'b101: out1 = ri;        // sel=1 -> pos = 0
      default:        out1 = ~ri;       // sel=1 -> pos = 1
    endcase
    out0 = ri;
  end
endmodule
