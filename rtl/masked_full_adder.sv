// masked_full_adder: Boolean-masked 1-bit full adder.
//
// Sum:   S = a ^ b ^ c is linear, so each share is computed on its own
//        (S0 = a0^b0^c0, S1 = a1^b1^c1) and delayed five registers.
// Carry: C = ab ^ bc ^ ca. Each product is formed by a glitch-resistant
//        Trichina gate, TG(a,b,r0) -> d, TG(b,c,r1) -> e, TG(c,a,r2) -> f,
//        and the shares are recombined linearly, C0 = d0^e0^f0 and
//        C1 = d1^e1^f1, into one output register per share.
//
// Interface: shares of a, b and carry-in, three fresh random bits.
// Timing: fully pipelined, sum and carry shares valid MFA_LAT = 5 cycles after
// the inputs (4 in the Trichina gate plus the output register).
// Equations and structure are the paper's; the five-register sum delay is
// chosen so that sum and carry leave together, which the figure implies but
// does not number.
module masked_full_adder
  import bomanet_pkg::*;
(
  input  logic       clk,
  input  logic [2:0] r,     // r[0] -> TG(a,b), r[1] -> TG(b,c), r[2] -> TG(c,a)
  input  logic       a0,
  input  logic       a1,
  input  logic       b0,
  input  logic       b1,
  input  logic       ci0,
  input  logic       ci1,
  output logic       s0,
  output logic       s1,
  output logic       co0,
  output logic       co1
);
  logic d0, d1, e0, e1, f0, f1;

  trichina_and u_tg0 (.clk, .r(r[0]), .a0(a0),  .a1(a1),  .b0(b0),  .b1(b1),  .c0(d0), .c1(d1));
  trichina_and u_tg1 (.clk, .r(r[1]), .a0(b0),  .a1(b1),  .b0(ci0), .b1(ci1), .c0(e0), .c1(e1));
  trichina_and u_tg2 (.clk, .r(r[2]), .a0(ci0), .a1(ci1), .b0(a0),  .b1(a1),  .c0(f0), .c1(f1));

  delay_line #(.W(1), .DEPTH(MFA_LAT)) u_s0 (.clk, .d(a0 ^ b0 ^ ci0), .q(s0));
  delay_line #(.W(1), .DEPTH(MFA_LAT)) u_s1 (.clk, .d(a1 ^ b1 ^ ci1), .q(s1));

  always_ff @(posedge clk) begin
    co0 <= d0 ^ e0 ^ f0;
    co1 <= d1 ^ e1 ^ f1;
  end

  // The sum delay must match the carry path: Trichina gates plus one register.
  initial assert (MFA_LAT == TG_LAT + 1);
endmodule
