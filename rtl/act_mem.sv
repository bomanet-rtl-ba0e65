// act_mem: masked activations of the hidden layers.
//
// One bank per hidden layer, N_NODES entries each, every entry the two
// Boolean shares {act1, act0} of a binary activation (1 = +1). A layer's bank
// is written as its nodes finish and read, one entry per cycle through a
// registered port, while the next layer accumulates. Keeping a bank per layer
// means a layer never overwrites activations the current layer still reads.
// Two bits per activation are the paper's; the banking is this design's.
module act_mem
  import bomanet_pkg::*;
#(
  parameter int unsigned N_LAYERS = N_HLAYERS_DEF,
  parameter int unsigned N_NODES  = N_HID_DEF
) (
  input  logic               clk,
  input  logic               we,
  input  logic [LAYER_W-1:0] wlayer,
  input  logic [NODE_W-1:0]  waddr,
  input  logic [1:0]         wdata,
  input  logic [LAYER_W-1:0] rlayer,
  input  logic [NODE_W-1:0]  raddr,
  output logic [1:0]         rdata
);
  logic [1:0] mem [N_LAYERS][N_NODES];

  always_ff @(posedge clk) begin
    if (we && wlayer < LAYER_W'(N_LAYERS) && waddr < NODE_W'(N_NODES))
      mem[wlayer][waddr] <= wdata;
    if (rlayer < LAYER_W'(N_LAYERS) && raddr < NODE_W'(N_NODES))
      rdata <= mem[rlayer][raddr];
    else
      rdata <= '0;
  end
endmodule
