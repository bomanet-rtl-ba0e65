// weight_mem: binary weights of every layer, one bit per connection.
//
// Holds the 784x1010 + 1010x1010 + 1010x1010 + 1010x10 = 2,842,140 binarized
// weights (1 = +1, 0 = -1) of the network in one flat bit array. The layout is
// layer by layer, and inside a layer input-major: address = base(layer) +
// input*nodes(layer) + node, so that the 101 consecutive nodes handled in one
// accumulation round sit at consecutive addresses. One weight is read per
// cycle through a registered read port. The weights stay unmasked in memory;
// they are only used as the select of a masked look-up or XORed into one
// share. A write port loads the trained model.
// The sizes are the paper's; layout and load port are this design's.
module weight_mem
  import bomanet_pkg::*;
#(
  parameter int unsigned DEPTH = N_IN_DEF * N_HID_DEF
                               + (N_HLAYERS_DEF - 1) * N_HID_DEF * N_HID_DEF
                               + N_HID_DEF * N_OUT_DEF,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic          wdata,
  input  logic [AW-1:0] raddr,
  output logic          rdata
);
  logic mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
