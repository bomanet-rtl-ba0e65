// trichina_and: glitch-resistant first-order masked AND gate.
//
// Computes the Boolean shares of c = a & b from the shares of a and b and one
// fresh random bit r, so that c0 ^ c1 = (a0 ^ a1) & (b0 ^ b1). Trichina's
// construction folds the four cross products into r one at a time:
//   c1 = (((r ^ a0b0) ^ a0b1) ^ a1b0) ^ a1b1,   c0 = r.
// As in the paper's glitch-resistant version, a register sits in front of
// every XOR except the first one, so the partial sums and the products reach
// each XOR in the same cycle and no XOR ever sees two shares of one secret
// without r. Each product is delayed to the stage where it is consumed, and r
// is delayed four times to stay aligned with c1.
//
// Interface: single-bit shares in, single-bit shares out, no reset (pure data
// pipeline). Timing: fully pipelined, one new operation per cycle, outputs
// valid TG_LAT = 4 cycles after the inputs.
// The gate structure and the order of the products are the paper's; the
// absence of reset is this design's choice.
module trichina_and (
  input  logic clk,
  input  logic r,
  input  logic a0,
  input  logic a1,
  input  logic b0,
  input  logic b1,
  output logic c0,
  output logic c1
);
  // Stage 1: first XOR (not registered at its input) plus the three products
  logic       x1, p01_1, p10_1, p11_1, r_1;
  // Stage 2..4
  logic       x2, p10_2, p11_2, r_2;
  logic       x3, p11_3, r_3;
  logic       x4, r_4;

  always_ff @(posedge clk) begin
    x1    <= r ^ (a0 & b0);
    p01_1 <= a0 & b1;
    p10_1 <= a1 & b0;
    p11_1 <= a1 & b1;
    r_1   <= r;

    x2    <= x1 ^ p01_1;
    p10_2 <= p10_1;
    p11_2 <= p11_1;
    r_2   <= r_1;

    x3    <= x2 ^ p10_2;
    p11_3 <= p11_2;
    r_3   <= r_2;

    x4    <= x3 ^ p11_3;
    r_4   <= r_3;
  end

  assign c0 = r_4;
  assign c1 = x4;
endmodule
