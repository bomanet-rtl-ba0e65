// act_mem_tb: writes random share pairs into all three banks of 1010
// activations, then reads random (bank, address) pairs and checks the data one
// clock later; also checks that writing one bank leaves the others intact.
module act_mem_tb;
  localparam int unsigned NL = 3, NN = 1010;
  logic       clk = 0, we = 0;
  logic [1:0] wlayer, rlayer;
  logic [9:0] waddr, raddr;
  logic [1:0] wdata, rdata;
  logic [1:0] model [NL][NN];
  int         checks = 0, failures = 0;

  act_mem #(.N_LAYERS(NL), .N_NODES(NN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rlayer = '0; raddr = '0;
    for (int l = 0; l < NL; l++) begin
      for (int i = 0; i < NN; i++) begin
        @(negedge clk);
        we = 1; wlayer = 2'(l); waddr = 10'(i); wdata = 2'($urandom); model[l][i] = wdata;
      end
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      int l, a;
      l = $urandom_range(NL - 1);
      a = $urandom_range(NN - 1);
      rlayer = 2'(l); raddr = 10'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[l][a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
