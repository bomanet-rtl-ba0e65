// masked_full_adder_tb: one random masked full-adder operation per cycle;
// checks, exactly 5 cycles later, that sum and carry shares recombine to
// a^b^c and majority(a,b,c).
module masked_full_adder_tb;
  logic       clk = 0;
  logic [2:0] r;
  logic       a0, a1, b0, b1, ci0, ci1, s0, s1, co0, co1;
  int         checks = 0, failures = 0;
  logic [2:0] hist [$];

  masked_full_adder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic a, b, c;
    for (int cyc = 0; cyc < 800; cyc++) begin
      @(negedge clk);
      if (hist.size() == 5) begin
        logic [2:0] h;
        logic es, ec;
        h  = hist.pop_front();
        es = h[2] ^ h[1] ^ h[0];
        ec = (h[2] & h[1]) | (h[1] & h[0]) | (h[0] & h[2]);
        checks += 2;
        if ((s0 ^ s1) !== es) failures++;
        if ((co0 ^ co1) !== ec) failures++;
      end
      a = 1'($urandom); b = 1'($urandom); c = 1'($urandom);
      r  = 3'($urandom);
      a0 = 1'($urandom); a1 = a ^ a0;
      b0 = 1'($urandom); b1 = b ^ b0;
      ci0 = 1'($urandom); ci1 = c ^ ci0;
      hist.push_back({a, b, c});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
