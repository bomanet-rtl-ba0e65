// bias_mem: one signed W-bit bias per node of every hidden and output layer.
//
// Address = layer*N_HID + node (the output layer follows the hidden ones).
// For the XNOR-POPCOUNT layers the stored value is the folded bias, i.e. it
// already contains the correction that turns a count of ones into a signed
// +/-1 sum, so the engine simply adds it after the last input. Registered
// read port, host write port. The bias is stored in the clear and masked with
// fresh random bits when it enters the adder.
// Depth follows from the paper's layer sizes; the width (the adder's) and the
// folded-bias convention are this design's.
module bias_mem
  import bomanet_pkg::*;
#(
  parameter int unsigned DEPTH = N_HLAYERS_DEF * N_HID_DEF + N_OUT_DEF,
  parameter int unsigned W     = ACC_W_DEF,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
