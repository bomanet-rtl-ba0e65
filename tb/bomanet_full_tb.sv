// bomanet_full_tb: one complete masked inference at the full network size,
// 784-1010-1010-1010-10, with every parameter of the engine at its default.
//
// The bench generates a random image, random binary weights (2,842,140 bits)
// and biases, loads them through the host ports, seeds the PRNGs and runs one
// masked inference. The result's shares must recombine to the class computed
// by a plain integer model of the BNN, and the run must take the number of
// cycles the 101-slot schedule implies (about 2.94 million). It also counts
// the engine's mechanisms (masked pixel products, XNOR accumulations, bias
// additions, activation writes, register-file feedback, idle output-layer
// slots, output-logic subtractions) and fails if one is missing.
// Simulation takes on the order of two minutes.
module bomanet_full_tb;
  import bomanet_pkg::*;
  localparam int unsigned N_IN      = 784;
  localparam int unsigned N_HID     = 1010;
  localparam int unsigned N_HLAYERS = 3;
  localparam int unsigned N_OUT     = 10;
  localparam int unsigned W         = 20;
  localparam int unsigned LAT       = 5 * W;
  localparam int unsigned SLOTS     = LAT + 1;
  localparam int unsigned WGT_DEPTH = N_IN * N_HID + (N_HLAYERS - 1) * N_HID * N_HID + N_HID * N_OUT;
  localparam int unsigned WGT_AW    = $clog2(WGT_DEPTH);
  localparam int unsigned BIAS_DEPTH = N_HLAYERS * N_HID + N_OUT;
  localparam int unsigned BIAS_AW   = $clog2(BIAS_DEPTH);
  localparam int unsigned PIX_AW    = $clog2(N_IN);
  localparam int unsigned IDX_W     = $clog2(N_OUT);
  localparam int unsigned RUNS      = 1;  // one masked inference

  logic                 clk = 0, rst_n = 0;
  logic                 pix_we = 0, w_we = 0, w_wdata = 0, b_we = 0;
  logic [PIX_AW-1:0]    pix_waddr = '0;
  logic [PIX_W-1:0]     pix_wdata = '0;
  logic [WGT_AW-1:0]    w_waddr = '0;
  logic [BIAS_AW-1:0]   b_waddr = '0;
  logic [W-1:0]         b_wdata = '0;
  logic                 prng_load = 0, prng_en = 1, prng_ready;
  logic [79:0]          prng_key = '0, prng_iv = '0;
  logic                 start = 0, busy, done;
  logic [2*IDX_W-1:0]   result;

  int checks = 0, failures = 0;

  bomanet_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ model
  byte unsigned pix [N_IN];
  bit           wgt [WGT_DEPTH];
  int           bias [BIAS_DEPTH];

  function automatic int unsigned waddr_of(int l, int i, int n);
    int unsigned base, nodes;
    base  = (l == 0) ? 0 : N_IN * N_HID + (l - 1) * N_HID * N_HID;
    nodes = (l == N_HLAYERS) ? N_OUT : N_HID;
    return base + i * nodes + n;
  endfunction

  function automatic int ref_classify();
    bit act [N_HID], nxt [N_HID];
    int y [N_OUT];
    int best;
    for (int n = 0; n < N_HID; n++) begin
      int s = bias[n];
      for (int i = 0; i < N_IN; i++) s += wgt[waddr_of(0, i, n)] ? int'(pix[i]) : -int'(pix[i]);
      act[n] = (s >= 0);
    end
    for (int l = 1; l < N_HLAYERS; l++) begin
      for (int n = 0; n < N_HID; n++) begin
        int s = bias[l * N_HID + n];
        for (int i = 0; i < N_HID; i++) s += ((act[i] == wgt[waddr_of(l, i, n)]) ? 1 : 0);
        nxt[n] = (s >= 0);
      end
      act = nxt;
    end
    for (int n = 0; n < N_OUT; n++) begin
      y[n] = bias[N_HLAYERS * N_HID + n];
      for (int i = 0; i < N_HID; i++) y[n] += ((act[i] == wgt[waddr_of(N_HLAYERS, i, n)]) ? 1 : 0);
    end
    best = 0;
    for (int n = 1; n < N_OUT; n++) if (y[n] > y[best]) best = n;
    return best;
  endfunction

  // ------------------------------------------------------------ mechanism counters
  longint n_pix = 0, n_xnor = 0, n_bias = 0, n_actw = 0, n_feedback = 0;
  longint n_idle_out = 0, n_cmp = 0, n_swap = 0, n_unmasked = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.iss_c.valid && dut.iss_c.kind == OP_MAC_PIX)  n_pix++;
    if (dut.iss_c.valid && dut.iss_c.kind == OP_MAC_XNOR) n_xnor++;
    if (dut.iss_c.valid && dut.iss_c.kind == OP_BIAS)     n_bias++;
    if (dut.iss_c.valid && !dut.iss_c.first)              n_feedback++;
    if (dut.u_ctrl.busy && !dut.iss_c.valid && dut.iss_c.layer == LAYER_W'(N_HLAYERS)) n_idle_out++;
    if (dut.act_we)   n_actw++;
    if (dut.ol_issue) n_cmp++;
    if (dut.tag_out.valid && dut.tag_out.kind == OP_CMP && (dut.sum0[W-1] ^ dut.sum1[W-1])) n_swap++;
    if (dut.busy && !prng_en) n_unmasked++;
  end

  // ------------------------------------------------------------ helpers
  task automatic load_image();
    for (int i = 0; i < N_IN; i++) begin
      pix[i] = byte'($urandom);
      @(negedge clk);
      pix_we = 1; pix_waddr = PIX_AW'(i); pix_wdata = pix[i];
    end
    @(negedge clk);
    pix_we = 0;
  endtask

  task automatic load_model();
    for (int a = 0; a < WGT_DEPTH; a++) begin
      wgt[a] = 1'($urandom);
      @(negedge clk);
      w_we = 1; w_waddr = WGT_AW'(a); w_wdata = wgt[a];
    end
    @(negedge clk);
    w_we = 0;
    for (int a = 0; a < BIAS_DEPTH; a++) begin
      if (a < N_HID)             bias[a] = $urandom_range(1000) - 500;
      else if (a < N_HLAYERS * N_HID) bias[a] = -int'(N_HID / 2) + $urandom_range(16) - 8;
      else                       bias[a] = -int'(N_HID / 2) + $urandom_range(4) - 2;
      @(negedge clk);
      b_we = 1; b_waddr = BIAS_AW'(a); b_wdata = W'(bias[a]);
    end
    @(negedge clk);
    b_we = 0;
  endtask

  task automatic seed(input logic [79:0] k, input logic [79:0] v);
    @(negedge clk);
    prng_key = k; prng_iv = v; prng_load = 1;
    @(negedge clk);
    prng_load = 0;
    while (!prng_ready) @(negedge clk);
  endtask

  // cycles the schedule needs: all rounds, the adder drain, the arg-max
  function automatic longint expected_cycles();
    longint c = 0;
    for (int l = 0; l <= N_HLAYERS; l++) begin
      int fanin, nodes, groups;
      fanin  = (l == 0) ? N_IN : N_HID;
      nodes  = (l == N_HLAYERS) ? N_OUT : N_HID;
      groups = (nodes + SLOTS - 1) / SLOTS;
      c += longint'(groups) * (fanin + 1) * SLOTS;
    end
    // start->run 1, drain LAT+3+1, done pulse 1, load 1, compares (N_OUT-1)*(LAT+1)
    c += 1 + (LAT + 4) + 1 + 1 + (N_OUT - 1) * (LAT + 1);
    return c;
  endfunction

  task automatic run_once(input string name);
    int     exp_cls;
    longint cyc;
    exp_cls = ref_classify();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (int'(result[IDX_W +: IDX_W] ^ result[0 +: IDX_W]) != exp_cls) begin
      failures++;
      $display("%s: class %0d expected %0d", name, result[IDX_W +: IDX_W] ^ result[0 +: IDX_W], exp_cls);
    end
    checks++;
    if (cyc > expected_cycles() + 2 || cyc < expected_cycles() - 2) begin
      failures++;
      $display("%s: %0d cycles, schedule needs %0d", name, cyc, expected_cycles());
    end
    $display("%s: class %0d (expected %0d), %0d cycles", name,
             result[IDX_W +: IDX_W] ^ result[0 +: IDX_W], exp_cls, cyc);
    @(negedge clk);
    checks++;
    if (busy) failures++;
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (4 * (WGT_DEPTH + RUNS * expected_cycles()) + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ test
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_model();
    load_image();
    seed({$urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom});
    run_once("masked");
    if (RUNS > 1) begin
      prng_en = 0;
      run_once("unmasked");
      prng_en = 1;
      load_image();
      seed({$urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom});
      run_once("reseeded");
    end

    $display("mechanisms: pix=%0d xnor=%0d bias=%0d actw=%0d feedback=%0d idle_out=%0d cmp=%0d swap=%0d unmasked=%0d",
             n_pix, n_xnor, n_bias, n_actw, n_feedback, n_idle_out, n_cmp, n_swap, n_unmasked);
    checks++; if (n_pix      != RUNS * N_IN * N_HID) failures++;
    checks++; if (n_xnor     == 0) failures++;
    checks++; if (n_bias     != RUNS * (N_HLAYERS * N_HID + N_OUT)) failures++;
    checks++; if (n_actw     != RUNS * N_HLAYERS * N_HID) failures++;
    checks++; if (n_feedback == 0) failures++;
    checks++; if (n_idle_out == 0) failures++;
    checks++; if (n_cmp      != RUNS * (N_OUT - 1)) failures++;
    if (RUNS > 1) begin checks++; if (n_swap == 0) failures++; end
    if (RUNS > 1) begin checks++; if (n_unmasked == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
