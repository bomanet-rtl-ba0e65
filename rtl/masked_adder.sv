// masked_adder: pipelined W-bit Boolean-masked ripple-carry adder/subtractor.
//
// W masked full adders are chained LSB first; bit n's full adder starts when
// the carry of bit n-1 leaves its adder, i.e. 5n cycles after the operands
// arrive. To keep one addition per cycle, every bit's operand shares and its
// three random bits (op_n = {a0_n, a1_n, b0_n, b1_n, r_3n, r_3n+1, r_3n+2})
// wait in a 5n-cycle delay line before their full adder, and every sum share
// waits 5(W-1-n) cycles after it, so all sum bits of one addition leave in the
// same cycle.
//
// Subtraction (sub = 1) computes a - b as a + ~b + 1. Complementing a masked
// value only needs its share 0 inverted, and the +1 is XORed into carry-in
// share 0; both are linear, so no extra randomness is needed.
//
// Interface: shares of a, b, carry-in, sub, 3W fresh random bits, all sampled
// in the same cycle. Timing: throughput one addition per cycle, sums and
// carry-out valid LAT = 5*W cycles later (100 cycles at W = 20).
// The structure and latency follow the paper; the carry-in ports are this
// design's way of letting the caller mask the carry-in.
module masked_adder
  import bomanet_pkg::*;
#(
  parameter int unsigned W = ACC_W_DEF
) (
  input  logic           clk,
  input  logic           sub,
  input  logic [W-1:0]   a0,
  input  logic [W-1:0]   a1,
  input  logic [W-1:0]   b0,
  input  logic [W-1:0]   b1,
  input  logic           ci0,
  input  logic           ci1,
  input  logic [3*W-1:0] r,
  output logic [W-1:0]   s0,
  output logic [W-1:0]   s1,
  output logic           co0,
  output logic           co1
);
  logic [W-1:0] bx0;
  assign bx0 = b0 ^ {W{sub}};

  logic [W:0] c0, c1;   // carry shares between the full adders
  assign c0[0] = ci0 ^ sub;
  assign c1[0] = ci1;

  for (genvar n = 0; n < W; n++) begin : g_bit
    logic [6:0] op_in, op_d;
    logic       s0_n, s1_n;
    assign op_in = {a0[n], a1[n], bx0[n], b1[n], r[3*n+2], r[3*n+1], r[3*n]};

    delay_line #(.W(7), .DEPTH(MFA_LAT * n)) u_op (.clk, .d(op_in), .q(op_d));

    masked_full_adder u_mfa (
      .clk,
      .r   (op_d[2:0]),
      .a0  (op_d[6]), .a1(op_d[5]),
      .b0  (op_d[4]), .b1(op_d[3]),
      .ci0 (c0[n]),   .ci1(c1[n]),
      .s0  (s0_n),    .s1(s1_n),
      .co0 (c0[n+1]), .co1(c1[n+1])
    );

    delay_line #(.W(2), .DEPTH(MFA_LAT * (W - 1 - n))) u_sum (
      .clk, .d({s1_n, s0_n}), .q({s1[n], s0[n]})
    );
  end

  assign co0 = c0[W];
  assign co1 = c1[W];

endmodule
