// weight_mem_tb: a reduced-depth weight memory (4096 bits) is filled with
// random bits, partly overwritten, and read back at random addresses; data
// must appear one clock after the address.
module weight_mem_tb;
  localparam int unsigned DEPTH = 4096;
  localparam int unsigned AW = $clog2(DEPTH);
  logic          clk = 0, we = 0, wdata, rdata;
  logic [AW-1:0] waddr, raddr;
  logic          model [DEPTH];
  int            checks = 0, failures = 0;

  weight_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = '0;
    for (int i = 0; i < DEPTH + 500; i++) begin
      int a;
      a = (i < DEPTH) ? i : $urandom_range(DEPTH - 1);
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = 1'($urandom); model[a] = wdata;
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
