// bias_mem_tb: fills all 3040 bias words with random 20-bit values and reads
// them back at random addresses, checking the one-clock read latency.
module bias_mem_tb;
  localparam int unsigned DEPTH = 3040;
  localparam int unsigned W = 20;
  localparam int unsigned AW = $clog2(DEPTH);
  logic          clk = 0, we = 0;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0]  wdata, rdata;
  logic [W-1:0]  model [DEPTH];
  int            checks = 0, failures = 0;

  bias_mem #(.DEPTH(DEPTH), .W(W)) dut (.*);

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
      we = 1; waddr = AW'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      raddr = AW'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
