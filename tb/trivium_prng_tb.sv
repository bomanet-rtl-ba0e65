// trivium_prng_tb: compares the 64-bit-per-clock generator against a
// bit-serial TRIVIUM model written with the cipher's three registers A (93),
// B (84) and C (111) kept apart. Checks the warm-up length (ready exactly
// 1 + 4*288/64 = 19 clocks after load: the load clock plus 18 warm-up clocks), 40 clocks of keystream for two key/IV
// pairs, and that en = 0 forces the output to zero.
module trivium_prng_tb;
  localparam int unsigned OUT_W = 64;
  logic             clk = 0, rst_n = 0, load = 0, en = 1, ready;
  logic [79:0]      key, iv;
  logic [OUT_W-1:0] rnd;
  int               checks = 0, failures = 0;

  trivium_prng #(.OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  // reference model, 1-based register indices as in the specification
  logic A [1:93];
  logic B [1:84];
  logic C [1:111];

  task automatic ref_init(input logic [79:0] k, input logic [79:0] v);
    for (int i = 1; i <= 93; i++)  A[i] = (i <= 80) ? k[i-1] : 1'b0;
    for (int i = 1; i <= 84; i++)  B[i] = (i <= 80) ? v[i-1] : 1'b0;
    for (int i = 1; i <= 111; i++) C[i] = (i >= 109);
  endtask

  function automatic logic ref_step();
    logic t1, t2, t3, z;
    t1 = A[66] ^ A[93];
    t2 = B[69] ^ B[84];
    t3 = C[66] ^ C[111];
    z  = t1 ^ t2 ^ t3;
    t1 = t1 ^ (A[91] & A[92]) ^ B[78];
    t2 = t2 ^ (B[82] & B[83]) ^ C[87];
    t3 = t3 ^ (C[109] & C[110]) ^ A[69];
    for (int i = 93; i > 1; i--)  A[i] = A[i-1];
    for (int i = 84; i > 1; i--)  B[i] = B[i-1];
    for (int i = 111; i > 1; i--) C[i] = C[i-1];
    A[1] = t3; B[1] = t1; C[1] = t2;
    return z;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_key(input logic [79:0] k, input logic [79:0] v);
    logic [OUT_W-1:0] exp;
    int wait_cyc;
    @(negedge clk);
    key = k; iv = v; load = 1;
    @(negedge clk);
    load = 0;
    ref_init(k, v);
    for (int i = 0; i < 4 * 288; i++) void'(ref_step());
    wait_cyc = 1;
    while (!ready) begin
      @(negedge clk);
      wait_cyc++;
    end
    checks++;
    if (wait_cyc != 1 + 4 * 288 / OUT_W) begin
      failures++;
      $display("ready after %0d clocks", wait_cyc);
    end
    for (int c = 0; c < 40; c++) begin
      for (int j = 0; j < OUT_W; j++) exp[j] = ref_step();
      checks++;
      if (rnd !== exp) begin
        failures++;
        if (failures < 5) $display("clk %0d got %h exp %h", c, rnd, exp);
      end
      @(negedge clk);
    end
  endtask

  initial begin
    key = '0; iv = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (ready) failures++;
    run_key(80'h0, 80'h0);
    run_key({$urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom});
    en = 0;
    #1;
    checks++;
    if (rnd !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
