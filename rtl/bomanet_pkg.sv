// bomanet_pkg: constants and types shared by the masked BNN engine.
//
// Network shape (784-1010-1010-1010-10), adder width (20 bits) and the
// per-bit latency of the masked full adder (5 cycles) follow the paper's
// main configuration. The issue descriptor type and operation kinds are this
// design's own encoding of what the controller asks the datapath to do in a
// cycle.
package bomanet_pkg;

  // Network shape
  localparam int unsigned N_IN_DEF      = 784;   // input pixels (28x28)
  localparam int unsigned N_HID_DEF     = 1010;  // nodes per hidden layer
  localparam int unsigned N_HLAYERS_DEF = 3;     // hidden layers
  localparam int unsigned N_OUT_DEF     = 10;    // output classes
  localparam int unsigned PIX_W         = 8;     // unsigned pixel width
  localparam int unsigned MUX_W         = 9;     // signed +/-pixel width

  // Masked arithmetic
  localparam int unsigned ACC_W_DEF     = 20;    // masked adder width
  localparam int unsigned TG_LAT        = 4;     // Trichina gate latency
  localparam int unsigned MFA_LAT       = 5;     // masked full adder latency

  // Layer index: 0..N_HLAYERS-1 are hidden layers, N_HLAYERS is the output layer
  localparam int unsigned LAYER_W = 2;
  localparam int unsigned NODE_W  = 10;  // enough for 1010 nodes / inputs
  localparam int unsigned SLOT_W  = 7;   // enough for 101 slots

  // What one adder issue does
  typedef enum logic [1:0] {
    OP_MAC_PIX  = 2'd0,  // accumulate +/-pixel (input layer)
    OP_MAC_XNOR = 2'd1,  // accumulate XNOR(activation, weight) (later layers)
    OP_BIAS     = 2'd2,  // add the bias, result goes to activation / output
    OP_CMP      = 2'd3   // max - node subtraction for the output logic
  } op_kind_e;

  // One cycle of work from the controller
  typedef struct packed {
    logic                valid;
    op_kind_e            kind;
    logic                first;   // first round of a node: accumulator starts at 0
    logic [LAYER_W-1:0]  layer;
    logic [NODE_W-1:0]   node;    // node within the layer
    logic [NODE_W-1:0]   inp;     // input index within the layer's fan-in
    logic [SLOT_W-1:0]   slot;    // register-file slot (node mod 101)
  } issue_t;

  // Tag carried alongside the adder pipeline
  typedef struct packed {
    logic                valid;
    op_kind_e            kind;
    logic [LAYER_W-1:0]  layer;
    logic [NODE_W-1:0]   node;
    logic [SLOT_W-1:0]   slot;
  } tag_t;

endpackage
