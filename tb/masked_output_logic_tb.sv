// masked_output_logic_tb: runs the masked arg-max over 40 random sets of ten
// signed output sums (including ties and negative values). The tested block
// issues subtractions; this bench stands in for the engine's masked adder
// with a 100-cycle delay queue that returns freshly re-masked MSB shares of
// max - node. Checks: the index shares recombine to the first index of the
// maximum, the max shares recombine to the maximum, and done arrives after
// exactly 9 comparisons of 101 cycles (issue plus 100 adder cycles) plus 2
// cycles of start-up.
module masked_output_logic_tb;
  localparam int unsigned N_OUT = 10, W = 20, IDX_W = 4, LAT = 100;
  logic                 clk = 0, rst_n = 0, start = 0;
  logic [IDX_W-1:0]     node_sel, idx0, idx1;
  logic [W-1:0]         node0, node1, max0, max1;
  logic                 issue, res_valid, msb0, msb1, done;
  logic [W+2*IDX_W-1:0] rnd;
  int                   checks = 0, failures = 0;

  logic [W-1:0] v [N_OUT], sh0 [N_OUT];
  logic         pipe_v [LAT];
  logic         pipe_m [LAT];

  masked_output_logic #(.N_OUT(N_OUT), .W(W), .IDX_W(IDX_W)) dut (.*);

  always #5 clk = ~clk;

  // register-file stand-in: fixed shares of each node
  assign node0 = sh0[node_sel];
  assign node1 = sh0[node_sel] ^ v[node_sel];

  // adder stand-in: MSB of (max - node) back after LAT cycles
  always_ff @(posedge clk) begin
    logic [W-1:0] diff;
    diff = (max0 ^ max1) - v[node_sel];
    pipe_v[0] <= issue;
    pipe_m[0] <= diff[W-1];
    for (int i = 1; i < LAT; i++) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_m[i] <= pipe_m[i-1];
    end
    rnd <= W'($urandom) | (28'($urandom) << W);
  end
  always_comb begin
    res_valid = pipe_v[LAT-1];
    msb0      = 1'($urandom);
    msb1      = msb0 ^ pipe_m[LAT-1];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int swaps = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_m[i] = 0; end
    for (int i = 0; i < N_OUT; i++) begin v[i] = '0; sh0[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int best, cyc;
      logic signed [W-1:0] bv;
      for (int i = 0; i < N_OUT; i++) begin
        v[i]   = (t % 4 == 0) ? W'($urandom_range(3)) : W'($signed($urandom_range(4000)) - 2000);
        sh0[i] = W'($urandom);
      end
      best = 0; bv = $signed(v[0]);
      for (int i = 1; i < N_OUT; i++) if ($signed(v[i]) > bv) begin best = i; bv = $signed(v[i]); end
      if (best != 0) swaps++;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks += 3;
      if ((idx0 ^ idx1) !== IDX_W'(best)) begin
        failures++;
        $display("test %0d: idx %0d expected %0d", t, idx0 ^ idx1, best);
      end
      if ((max0 ^ max1) !== W'(bv)) failures++;
      if (cyc != 2 + (N_OUT - 1) * (LAT + 1)) begin
        failures++;
        $display("test %0d: %0d cycles", t, cyc);
      end
    end
    checks++;
    if (swaps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
