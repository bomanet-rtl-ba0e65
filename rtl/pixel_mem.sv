// pixel_mem: input image memory, DEPTH unsigned pixels of PIX_W bits.
//
// The host writes the image through a simple write port; the engine reads one
// pixel per cycle through a registered read port (data one cycle after the
// address), which maps onto a block RAM. Pixels are public data: they are not
// masked. Depth and pixel width are the paper's (28x28 8-bit MNIST image); the
// port protocol is this design's.
module pixel_mem
  import bomanet_pkg::*;
#(
  parameter int unsigned DEPTH = N_IN_DEF,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [PIX_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [PIX_W-1:0] rdata
);
  logic [PIX_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
