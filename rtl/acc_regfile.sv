// acc_regfile: the accumulator register file of the throughput optimisation.
//
// The masked adder takes 100 cycles, so a node's running sum cannot be fed
// back for its next input in the next cycle. Instead DEPTH = 101 nodes are
// accumulated side by side: slot k holds the two shares of node k's partial
// sum. The adder result for slot k is written here (write demultiplexer) in
// the cycle it leaves the adder, and is read back combinationally (read
// multiplexer) in the next cycle as the adder's accumulator operand, which
// closes a loop of exactly 101 cycles: 100 in the adder plus this register.
//
// Interface: one write port (slot, two W-bit shares), one asynchronous read
// port. No reset: every slot is written before it is read.
// Depth and purpose are the paper's; the port arrangement is this design's.
module acc_regfile
  import bomanet_pkg::*;
#(
  parameter int unsigned DEPTH = MFA_LAT * ACC_W_DEF + 1,
  parameter int unsigned W     = ACC_W_DEF
) (
  input  logic              clk,
  input  logic              we,
  input  logic [SLOT_W-1:0] waddr,
  input  logic [W-1:0]      wd0,
  input  logic [W-1:0]      wd1,
  input  logic [SLOT_W-1:0] raddr,
  output logic [W-1:0]      rd0,
  output logic [W-1:0]      rd1
);
  logic [W-1:0] sh0 [DEPTH];
  logic [W-1:0] sh1 [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < SLOT_W'(DEPTH)) begin
      sh0[waddr] <= wd0;
      sh1[waddr] <= wd1;
    end
  end

  always_comb begin
    rd0 = '0;
    rd1 = '0;
    if (raddr < SLOT_W'(DEPTH)) begin
      rd0 = sh0[raddr];
      rd1 = sh1[raddr];
    end
  end
endmodule
