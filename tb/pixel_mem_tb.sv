// pixel_mem_tb: fills all 784 pixels with random bytes, reads every address
// back in random order and checks the data one clock after the address.
module pixel_mem_tb;
  localparam int unsigned DEPTH = 784;
  localparam int unsigned AW = $clog2(DEPTH);
  logic          clk = 0, we = 0;
  logic [AW-1:0] waddr, raddr;
  logic [7:0]    wdata, rdata;
  logic [7:0]    model [DEPTH];
  int            checks = 0, failures = 0;

  pixel_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = 8'($urandom); model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 2000; i++) begin
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
