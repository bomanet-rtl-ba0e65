// masked_output_logic: masked arg-max over the output-layer sums.
//
// The classification result is the index of the largest of the N_OUT output
// sums, all held as Boolean shares in the accumulator register file. A masked
// comparison is turned into a masked subtraction on the engine's own masked
// adder: for node j = 1 .. N_OUT-1 this block issues max - node_j with the
// adder's sub flag set, and when the difference comes back (one adder latency
// later) its MSB shares tell whether it is negative, i.e. node_j > max. A
// masked multiplexer (masked_sel_lut per bit, select = the MSB shares) then
// keeps either the old max shares or node_j's shares, re-masked with fresh
// bits; a second one does the same for the shares of the index, where j
// itself enters masked by fresh bits. Node 0 is loaded as the first maximum
// through the plain multiplexers in front of the max registers.
//
// Interface: start (pulse) once the output sums are in the register file;
// node_sel selects the node read from the register file (node0/node1 its
// shares); issue asks the top to send {max0,max1} - {node0,node1} into the
// adder this cycle; res_valid/msb0/msb1 return the MSB shares of that result.
// done pulses when idx0 ^ idx1 is the class index; idx stays until the next
// start. Timing: N_OUT-1 comparisons of (adder latency + 1) cycles each.
// The subtract-and-swap scheme, the sub flag and the masked index update are
// the paper's; the sequencing and the initial load are this design's.
module masked_output_logic
  import bomanet_pkg::*;
#(
  parameter int unsigned N_OUT = N_OUT_DEF,
  parameter int unsigned W     = ACC_W_DEF,
  parameter int unsigned IDX_W = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic [IDX_W-1:0]       node_sel,
  input  logic [W-1:0]           node0,
  input  logic [W-1:0]           node1,
  output logic                   issue,
  output logic [W-1:0]           max0,
  output logic [W-1:0]           max1,
  input  logic                   res_valid,
  input  logic                   msb0,
  input  logic                   msb1,
  input  logic [W+2*IDX_W-1:0]   rnd,
  output logic                   done,
  output logic [IDX_W-1:0]       idx0,
  output logic [IDX_W-1:0]       idx1
);
  typedef enum logic [1:0] {O_IDLE, O_LOAD, O_ISSUE, O_WAIT} ostate_e;

  ostate_e          state;
  logic [IDX_W-1:0] j;

  logic [W-1:0]     r_max;
  logic [IDX_W-1:0] r_idx, r_j;
  assign r_max = rnd[W-1:0];
  assign r_idx = rnd[W +: IDX_W];
  assign r_j   = rnd[W+IDX_W +: IDX_W];

  // Candidate index j, masked with fresh bits
  logic [IDX_W-1:0] j0, j1;
  assign j0 = r_j;
  assign j1 = j ^ r_j;

  // Masked multiplexers: keep the old value or take node j
  logic [W-1:0]     nmax0, nmax1;
  logic [IDX_W-1:0] nidx0, nidx1;
  for (genvar b = 0; b < W; b++) begin : g_max
    masked_sel_lut u_sel (
      .x0(max0[b]), .x1(max1[b]), .y0(node0[b]), .y1(node1[b]),
      .s0(msb0), .s1(msb1), .r(r_max[b]), .out0(nmax0[b]), .out1(nmax1[b])
    );
  end
  for (genvar b = 0; b < IDX_W; b++) begin : g_idx
    masked_sel_lut u_sel (
      .x0(idx0[b]), .x1(idx1[b]), .y0(j0[b]), .y1(j1[b]),
      .s0(msb0), .s1(msb1), .r(r_idx[b]), .out0(nidx0[b]), .out1(nidx1[b])
    );
  end

  assign node_sel = (state == O_LOAD) ? '0 : j;
  assign issue    = (state == O_ISSUE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= O_IDLE;
      j     <= '0;
      done  <= 1'b0;
      max0  <= '0;
      max1  <= '0;
      idx0  <= '0;
      idx1  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        O_IDLE: if (start) state <= O_LOAD;
        O_LOAD: begin
          // plain multiplexers: node 0 is the first maximum, index 0 masked
          max0  <= node0;
          max1  <= node1;
          idx0  <= r_idx;
          idx1  <= r_idx;
          j     <= IDX_W'(1);
          if (N_OUT > 1) state <= O_ISSUE;
          else begin
            state <= O_IDLE;
            done  <= 1'b1;
          end
        end
        O_ISSUE: state <= O_WAIT;
        O_WAIT: begin
          if (res_valid) begin
            max0 <= nmax0;
            max1 <= nmax1;
            idx0 <= nidx0;
            idx1 <= nidx1;
            if (j == IDX_W'(N_OUT - 1)) begin
              state <= O_IDLE;
              done  <= 1'b1;
            end else begin
              j     <= j + 1'b1;
              state <= O_ISSUE;
            end
          end
        end
        default: state <= O_IDLE;
      endcase
    end
  end
endmodule
