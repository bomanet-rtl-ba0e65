// trichina_and_tb: drives the masked AND gate with a fresh random operation
// every cycle and checks, exactly 4 cycles later, that the output shares
// recombine to a & b and that share 0 is the delayed random bit.
module trichina_and_tb;
  logic clk = 0;
  logic r, a0, a1, b0, b1, c0, c1;
  int   checks = 0, failures = 0;
  logic [4:0] hist [$];   // {r, a, b} of past cycles

  trichina_and dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic a, b;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      if (hist.size() == 4) begin
        logic [4:0] h;
        h = hist.pop_front();
        checks++;
        if ((c0 ^ c1) !== (h[1] & h[0]) || c0 !== h[4]) begin
          failures++;
          if (failures < 10) $display("mismatch cyc %0d: c0=%b c1=%b exp=%b r=%b", cyc, c0, c1, h[1] & h[0], h[4]);
        end
      end
      r  = 1'($urandom);
      a  = 1'($urandom);
      b  = 1'($urandom);
      a0 = 1'($urandom); a1 = a ^ a0;
      b0 = 1'($urandom); b1 = b ^ b0;
      hist.push_back({r, 2'b00, a, b});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
