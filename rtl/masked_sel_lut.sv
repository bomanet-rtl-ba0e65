// masked_sel_lut: 1-bit multiplexer whose data and select are all masked.
//
// Inputs are the Boolean shares of two data bits x and y and of a select s,
// plus one fresh random bit r. The cell returns out1 = (s ? y : x) ^ r and
// out0 = r, i.e. the selected bit re-masked by r. It is written as one
// combinational look-up and is meant to be mapped, like the pixel multiplexer
// cells, as an atomic look-up so that no intermediate wire carries an
// unmasked value. Combinational.
// The paper uses a masked multiplexer with the sign of a masked difference as
// select but does not give its insides; this look-up is this design's.
module masked_sel_lut (
  input  logic x0,
  input  logic x1,
  input  logic y0,
  input  logic y1,
  input  logic s0,
  input  logic s1,
  input  logic r,
  output logic out0,
  output logic out1
);
  always_comb begin
    unique case ({s0 ^ s1})
      1'b1:    out1 = (y0 ^ y1) ^ r;
      default: out1 = (x0 ^ x1) ^ r;
    endcase
    out0 = r;
  end
endmodule
