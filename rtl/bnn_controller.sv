// bnn_controller: schedule of the whole inference, one adder issue per cycle.
//
// The single masked adder has a 100-cycle latency and the accumulator loop
// around it (adder plus register file) is SLOTS = 101 cycles long. The
// schedule therefore works on groups of 101 nodes at a time: in one round the
// controller issues input i of every node of the group, node after node
// (slot k = node mod 101, one per cycle); when slot k comes up again 101
// cycles later, its partial sum is back in the register file and input i+1
// can be added. A group takes one round per input of the layer plus a final
// bias round, then the next group starts without a gap.
//
//   for layer L in 0 .. N_HLAYERS        (N_HLAYERS is the output layer)
//     for group g of SLOTS nodes
//       for round r in 0 .. fanin(L)     (r = fanin(L) is the bias round)
//         for slot k in 0 .. SLOTS-1     (one cycle each)
//           issue (L, node = g*SLOTS + k, input r) if node < nodes(L)
//
// Layer 0 accumulates signed pixels, the later layers XNOR bits. The output
// layer has only N_OUT = 10 nodes, so its rounds are 101 cycles with 10
// useful issues; this is why the masked engine is slightly slower than the
// unmasked one. After the last issue the controller waits DRAIN_CYC cycles for
// the adder to empty and pulses layers_done.
//
// Interface: start (pulse, ignored while busy), iss = descriptor of this
// cycle's issue (registered), busy, layers_done (one-cycle pulse).
// The grouping by 101 and the output-layer behaviour are the paper's; the
// loop order inside a group and the descriptor format are this design's.
module bnn_controller
  import bomanet_pkg::*;
#(
  parameter int unsigned N_IN      = N_IN_DEF,
  parameter int unsigned N_HID     = N_HID_DEF,
  parameter int unsigned N_HLAYERS = N_HLAYERS_DEF,
  parameter int unsigned N_OUT     = N_OUT_DEF,
  parameter int unsigned SLOTS     = MFA_LAT * ACC_W_DEF + 1,
  parameter int unsigned DRAIN_CYC = MFA_LAT * ACC_W_DEF + 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output issue_t iss,
  output logic   busy,
  output logic   layers_done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e             state;
  logic [LAYER_W-1:0] layer;
  logic [NODE_W-1:0]  base;    // first node of the current group
  logic [NODE_W-1:0]  rnd;     // round = input index, fanin = bias round
  logic [SLOT_W-1:0]  slot;
  logic [7:0]         drain;

  logic [NODE_W-1:0]  fanin, nodes, node;
  logic               last_slot, last_round, last_group, last_layer;

  always_comb begin
    fanin      = (layer == 0) ? NODE_W'(N_IN) : NODE_W'(N_HID);
    nodes      = (layer == LAYER_W'(N_HLAYERS)) ? NODE_W'(N_OUT) : NODE_W'(N_HID);
    node       = base + NODE_W'(slot);
    last_slot  = (slot == SLOT_W'(SLOTS - 1));
    last_round = (rnd == fanin);
    last_group = (32'(base) + SLOTS >= 32'(nodes));
    last_layer = (layer == LAYER_W'(N_HLAYERS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer       <= '0;
      base        <= '0;
      rnd         <= '0;
      slot        <= '0;
      drain       <= '0;
      iss         <= '0;
      layers_done <= 1'b0;
    end else begin
      layers_done <= 1'b0;
      iss         <= '0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_RUN;
            layer <= '0;
            base  <= '0;
            rnd   <= '0;
            slot  <= '0;
          end
        end
        S_RUN: begin
          iss.valid <= (node < nodes);
          iss.kind  <= last_round ? OP_BIAS : ((layer == 0) ? OP_MAC_PIX : OP_MAC_XNOR);
          iss.first <= (rnd == 0);
          iss.layer <= layer;
          iss.node  <= node;
          iss.inp   <= rnd;
          iss.slot  <= slot;
          if (!last_slot) begin
            slot <= slot + 1'b1;
          end else begin
            slot <= '0;
            if (!last_round) begin
              rnd <= rnd + 1'b1;
            end else begin
              rnd <= '0;
              if (!last_group) begin
                base <= base + NODE_W'(SLOTS);
              end else begin
                base <= '0;
                if (!last_layer) begin
                  layer <= layer + 1'b1;
                end else begin
                  state <= S_DRAIN;
                  drain <= 8'(DRAIN_CYC);
                end
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain == 0) begin
            layers_done <= 1'b1;
            state       <= S_IDLE;
          end else begin
            drain <= drain - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
