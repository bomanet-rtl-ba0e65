// masked_mux: masked multiplication of a pixel by a binary weight.
//
// A binarized weight w in {-1,+1} (stored as 0/1) times a pixel a is a choice
// between +a and -a, so the multiplier is a W-bit multiplexer with the weight
// as its select. Since the weight is the secret, the multiplexer is built
// from W independent 1-bit masked look-up cells (masked_lut): bit i returns
// (w ? +a_i : -a_i) ^ ri_i together with the mask ri_i, so the product leaves
// as two Boolean shares and the select never drives a plain output.
//
// Interface: pos = +a and neg = -a, both W bits (9-bit sign-extended pixel),
// sel = weight bit (1 = +1), ri = W fresh random bits. out1 = masked product,
// out0 = mask (share 0). Combinational; the caller registers the shares.
// Width, structure and the 0/1 weight encoding are the paper's.
module masked_mux
  import bomanet_pkg::*;
#(
  parameter int unsigned W = MUX_W
) (
  input  logic [W-1:0] pos,
  input  logic [W-1:0] neg,
  input  logic         sel,
  input  logic [W-1:0] ri,
  output logic [W-1:0] out1,
  output logic [W-1:0] out0
);
  for (genvar i = 0; i < W; i++) begin : g_lut
    masked_lut u_lut (
      .pos(pos[i]), .neg(neg[i]), .sel(sel), .ri(ri[i]),
      .out1(out1[i]), .out0(out0[i])
    );
  end
endmodule
