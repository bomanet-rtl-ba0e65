// acc_regfile_tb: random writes of share pairs into the 101 slots with
// random combinational reads in the same cycles; a read must return the value
// written by an earlier clock edge (write-then-read of the accumulator loop).
module acc_regfile_tb;
  localparam int unsigned DEPTH = 101, W = 20;
  logic         clk = 0, we = 0;
  logic [6:0]   waddr, raddr;
  logic [W-1:0] wd0, wd1, rd0, rd1;
  logic [W-1:0] m0 [DEPTH], m1 [DEPTH];
  int           checks = 0, failures = 0;

  acc_regfile #(.DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 7'(i); wd0 = W'($urandom); wd1 = W'($urandom);
      m0[i] = wd0; m1[i] = wd1;
    end
    for (int i = 0; i < 4000; i++) begin
      int a, b;
      @(negedge clk);
      // check a read of the state before this cycle's write
      a = $urandom_range(DEPTH - 1);
      raddr = 7'(a);
      #1;
      checks++;
      if (rd0 !== m0[a] || rd1 !== m1[a]) failures++;
      b = $urandom_range(DEPTH - 1);
      we = 1'($urandom); waddr = 7'(b); wd0 = W'($urandom); wd1 = W'($urandom);
      if (we) begin m0[b] = wd0; m1[b] = wd1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
