// bomanet_top: fully masked binarized neural network inference engine.
//
// Runs a 784-1010-1010-1010-10 fully connected BNN on one image, keeping every
// value that depends on the trained weights and biases split into two Boolean
// shares from the moment it is formed until the class index leaves the chip.
// All additions of the network go, one per cycle, through a single pipelined
// masked adder (100 cycles at 20 bits); a 101-entry accumulator register file
// keeps 101 nodes' partial sums in flight so that the adder never stalls.
//
// Datapath, in pipeline order:
//   A  the controller's issue descriptor addresses the pixel, weight, bias and
//      activation memories;
//   B  the operand is formed from the memory outputs:
//        layer 0:       +/-pixel through the masked multiplexer (weight = select),
//                       sign-extended to W bits;
//        later layers:  XNOR of the masked activation and the weight, zero-extended;
//        bias round:    the bias masked with fresh bits;
//   C  the operand shares are registered and enter the masked adder together
//      with the accumulator shares read from the register file (a masked zero
//      on a node's first input);
//   +5W cycles later the sum shares are written back to the register file, or,
//      after the bias round, turned into activation shares (~MSB) and stored in
//      the activation memory. The output layer's final sums stay in the
//      register file, where the masked output logic reads them and uses the
//      same adder in subtract mode to find the arg-max.
// Three TRIVIUM generators supply the fresh random bits (about 140 per cycle).
//
// Interface: host write ports for the image (pix_*), the binary weights (w_*)
// and the biases (b_*); PRNG key/IV load and enable (prng_en = 0 runs the
// design unmasked); start/busy/done; result = {index share 1, index share 0},
// valid from done until the next start. start is taken when idle and the PRNG
// is ready (or disabled).
// Timing: about 2.94 million cycles per inference at the default sizes.
// The architecture, sizes and latencies are the paper's; the pipeline stages
// A/B/C, the memory layouts, the masked zero start value, the bias masking and
// the port protocol are this design's.
// Lint notes: the three generators give 192 bits per cycle, of which 138 are
// used; the adder's carry-out, the controller's busy flag (the top's own busy
// also covers the arg-max phase) and the issue fields that stage C does not
// need are left unconnected on purpose.
module bomanet_top
  import bomanet_pkg::*;
#(
  parameter int unsigned N_IN      = N_IN_DEF,
  parameter int unsigned N_HID     = N_HID_DEF,
  parameter int unsigned N_HLAYERS = N_HLAYERS_DEF,
  parameter int unsigned N_OUT     = N_OUT_DEF,
  parameter int unsigned W         = ACC_W_DEF,
  // derived sizes (not meant to be overridden)
  parameter int unsigned PIX_AW    = $clog2(N_IN),
  parameter int unsigned WGT_DEPTH = N_IN * N_HID + (N_HLAYERS - 1) * N_HID * N_HID + N_HID * N_OUT,
  parameter int unsigned WGT_AW    = $clog2(WGT_DEPTH),
  parameter int unsigned BIAS_DEPTH = N_HLAYERS * N_HID + N_OUT,
  parameter int unsigned BIAS_AW   = $clog2(BIAS_DEPTH),
  parameter int unsigned IDX_W     = $clog2(N_OUT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // image load
  input  logic                 pix_we,
  input  logic [PIX_AW-1:0]    pix_waddr,
  input  logic [PIX_W-1:0]     pix_wdata,
  // model load
  input  logic                 w_we,
  input  logic [WGT_AW-1:0]    w_waddr,
  input  logic                 w_wdata,
  input  logic                 b_we,
  input  logic [BIAS_AW-1:0]   b_waddr,
  input  logic [W-1:0]         b_wdata,
  // mask generator
  input  logic                 prng_load,
  input  logic [79:0]          prng_key,
  input  logic [79:0]          prng_iv,
  input  logic                 prng_en,
  output logic                 prng_ready,
  // run
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [2*IDX_W-1:0]   result
);
  localparam int unsigned LAT   = MFA_LAT * W;   // masked adder latency
  localparam int unsigned SLOTS = LAT + 1;       // accumulator loop length

  // ---------------------------------------------------------------- randomness
  localparam int unsigned R_ADD  = 3 * W + 1;            // adder + carry-in
  localparam int unsigned R_MUX  = MUX_W;                // masked multiplexer
  localparam int unsigned R_ZERO = W;                    // masked zero
  localparam int unsigned R_BIAS = W;                    // bias masking
  localparam int unsigned R_OUT  = W + 2 * IDX_W;        // output logic
  localparam int unsigned R_TOT  = R_ADD + R_MUX + R_ZERO + R_BIAS + R_OUT;
  localparam int unsigned PRNG_W = 64;
  localparam int unsigned N_PRNG = (R_TOT + PRNG_W - 1) / PRNG_W;

  logic [N_PRNG*PRNG_W-1:0] rnd;
  logic [N_PRNG-1:0]        rdy;
  for (genvar c = 0; c < N_PRNG; c++) begin : g_prng
    trivium_prng #(.OUT_W(PRNG_W)) u_prng (
      .clk, .rst_n, .load(prng_load), .key(prng_key),
      .iv(prng_iv ^ 80'(c)), .en(prng_en), .ready(rdy[c]),
      .rnd(rnd[c*PRNG_W +: PRNG_W])
    );
  end
  assign prng_ready = &rdy;

  logic [R_ADD-1:0]  r_add;
  logic [R_MUX-1:0]  r_mux;
  logic [R_ZERO-1:0] r_zero;
  logic [R_BIAS-1:0] r_bias;
  logic [R_OUT-1:0]  r_out;
  assign {r_out, r_bias, r_zero, r_mux, r_add} = rnd[R_TOT-1:0];

  // ---------------------------------------------------------------- control
  issue_t iss_a, iss_b, iss_c;
  logic   ctrl_busy, layers_done, ol_done, ol_issue;
  logic   start_ok;

  assign start_ok = start && !busy && (prng_ready || !prng_en);

  bnn_controller #(
    .N_IN(N_IN), .N_HID(N_HID), .N_HLAYERS(N_HLAYERS), .N_OUT(N_OUT),
    .SLOTS(SLOTS), .DRAIN_CYC(LAT + 3)
  ) u_ctrl (
    .clk, .rst_n, .start(start_ok), .iss(iss_a), .busy(ctrl_busy),
    .layers_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= 1'b0;
    else if (start_ok) busy <= 1'b1;
    else if (ol_done)  busy <= 1'b0;
  end
  assign done = ol_done;

  // ---------------------------------------------------------------- stage A: memories
  logic [PIX_W-1:0]   pix_q;
  logic               w_q;
  logic [W-1:0]       bias_q;
  logic [1:0]         act_q;
  logic [WGT_AW-1:0]  w_raddr;
  logic [BIAS_AW-1:0] b_raddr;
  logic [LAYER_W-1:0] act_rlayer;

  always_comb begin
    logic [31:0] wbase, wnodes;
    if (iss_a.layer == 0) wbase = 0;
    else wbase = 32'(N_IN * N_HID) + 32'(iss_a.layer - 1) * 32'(N_HID * N_HID);
    wnodes     = (iss_a.layer == LAYER_W'(N_HLAYERS)) ? 32'(N_OUT) : 32'(N_HID);
    w_raddr    = WGT_AW'(wbase + 32'(iss_a.inp) * wnodes + 32'(iss_a.node));
    b_raddr    = BIAS_AW'(32'(iss_a.layer) * 32'(N_HID) + 32'(iss_a.node));
    act_rlayer = iss_a.layer - 1'b1;
  end

  pixel_mem #(.DEPTH(N_IN)) u_pix (
    .clk, .we(pix_we), .waddr(pix_waddr), .wdata(pix_wdata),
    .raddr(PIX_AW'(iss_a.inp)), .rdata(pix_q)
  );

  weight_mem #(.DEPTH(WGT_DEPTH)) u_wgt (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .raddr(w_raddr), .rdata(w_q)
  );

  bias_mem #(.DEPTH(BIAS_DEPTH), .W(W)) u_bias (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
    .raddr(b_raddr), .rdata(bias_q)
  );

  logic               act_we;
  logic [LAYER_W-1:0] act_wlayer;
  logic [NODE_W-1:0]  act_waddr;
  logic [1:0]         act_wdata;

  act_mem #(.N_LAYERS(N_HLAYERS), .N_NODES(N_HID)) u_act (
    .clk, .we(act_we), .wlayer(act_wlayer), .waddr(act_waddr), .wdata(act_wdata),
    .rlayer(act_rlayer), .raddr(iss_a.inp), .rdata(act_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_b <= '0;
      iss_c <= '0;
    end else begin
      iss_b <= iss_a;
      iss_c <= iss_b;
    end
  end

  // ---------------------------------------------------------------- stage B: operand
  logic [MUX_W-1:0] pos, neg, pm0, pm1;
  logic [W-1:0]     xn0, xn1;
  logic [W-1:0]     opb0_d, opb1_d, opb0, opb1;

  assign pos = {1'b0, pix_q};
  assign neg = MUX_W'(-{1'b0, pix_q});

  masked_mux #(.W(MUX_W)) u_mmux (
    .pos, .neg, .sel(w_q), .ri(r_mux), .out1(pm1), .out0(pm0)
  );

  masked_xnor #(.W(W)) u_xnor (
    .act0(act_q[0]), .act1(act_q[1]), .w(w_q), .out0(xn0), .out1(xn1)
  );

  always_comb begin
    unique case (iss_b.kind)
      OP_MAC_PIX: begin
        opb0_d = {{(W-MUX_W){pm0[MUX_W-1]}}, pm0};
        opb1_d = {{(W-MUX_W){pm1[MUX_W-1]}}, pm1};
      end
      OP_MAC_XNOR: begin
        opb0_d = xn0;
        opb1_d = xn1;
      end
      default: begin  // OP_BIAS
        opb0_d = r_bias;
        opb1_d = bias_q ^ r_bias;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    opb0 <= opb0_d;
    opb1 <= opb1_d;
  end

  // ---------------------------------------------------------------- stage C: adder
  logic [W-1:0]     acc0, acc1, add_a0, add_a1, add_b0, add_b1, sum0, sum1;
  logic [W-1:0]     max0, max1;
  logic [IDX_W-1:0] node_sel;
  logic [SLOT_W-1:0] rf_raddr;
  logic             add_sub, co0, co1;

  assign rf_raddr = iss_c.valid ? iss_c.slot : SLOT_W'(node_sel);

  logic             rf_we;
  logic [SLOT_W-1:0] rf_waddr;

  acc_regfile #(.DEPTH(SLOTS), .W(W)) u_rf (
    .clk, .we(rf_we), .waddr(rf_waddr), .wd0(sum0), .wd1(sum1),
    .raddr(rf_raddr), .rd0(acc0), .rd1(acc1)
  );

  always_comb begin
    if (ol_issue) begin
      add_a0  = max0;
      add_a1  = max1;
      add_b0  = acc0;
      add_b1  = acc1;
      add_sub = 1'b1;
    end else begin
      add_a0  = iss_c.first ? r_zero : acc0;
      add_a1  = iss_c.first ? r_zero : acc1;
      add_b0  = opb0;
      add_b1  = opb1;
      add_sub = 1'b0;
    end
  end

  masked_adder #(.W(W)) u_add (
    .clk, .sub(add_sub), .a0(add_a0), .a1(add_a1), .b0(add_b0), .b1(add_b1),
    .ci0(r_add[3*W]), .ci1(r_add[3*W]), .r(r_add[3*W-1:0]),
    .s0(sum0), .s1(sum1), .co0, .co1
  );

  // control tag travelling with the addition
  tag_t tag_in, tag_out;
  always_comb begin
    tag_in.valid = iss_c.valid || ol_issue;
    tag_in.kind  = ol_issue ? OP_CMP : iss_c.kind;
    tag_in.layer = iss_c.layer;
    tag_in.node  = iss_c.node;
    tag_in.slot  = iss_c.slot;
  end

  delay_line #(.W($bits(tag_t)), .DEPTH(LAT)) u_tag (
    .clk, .d(tag_in), .q(tag_out)
  );

  // ---------------------------------------------------------------- write-back
  logic act0, act1;
  masked_activation u_actfn (
    .msb0(sum0[W-1]), .msb1(sum1[W-1]), .act0(act0), .act1(act1)
  );

  always_comb begin
    rf_we      = 1'b0;
    rf_waddr   = tag_out.slot;
    act_we     = 1'b0;
    act_wlayer = tag_out.layer;
    act_waddr  = tag_out.node;
    act_wdata  = {act1, act0};
    if (tag_out.valid) begin
      unique case (tag_out.kind)
        OP_MAC_PIX, OP_MAC_XNOR: rf_we = 1'b1;
        OP_BIAS: begin
          if (tag_out.layer == LAYER_W'(N_HLAYERS)) rf_we = 1'b1;  // output sums
          else act_we = 1'b1;
        end
        default: ;  // OP_CMP: consumed by the output logic
      endcase
    end
  end

  // ---------------------------------------------------------------- output logic
  logic [IDX_W-1:0] idx0, idx1;

  masked_output_logic #(.N_OUT(N_OUT), .W(W), .IDX_W(IDX_W)) u_out (
    .clk, .rst_n, .start(layers_done), .node_sel, .node0(acc0), .node1(acc1),
    .issue(ol_issue), .max0, .max1,
    .res_valid(tag_out.valid && tag_out.kind == OP_CMP),
    .msb0(sum0[W-1]), .msb1(sum1[W-1]), .rnd(r_out),
    .done(ol_done), .idx0, .idx1
  );

  assign result = {idx1, idx0};

  // The accumulator loop only works if a slot comes round exactly when its
  // previous sum has left the adder.
  initial assert (SLOTS == LAT + 1) else $error("slot count must equal adder latency + 1");
endmodule
