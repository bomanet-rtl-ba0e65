// masked_adder_tb: feeds the 20-bit masked adder a new random addition or
// subtraction every cycle (random shares, random carry-in, random masks) and
// checks that each result appears exactly 100 cycles later and recombines to
// a+b+ci or a-b (mod 2^20), including the carry-out. This also checks the
// one-addition-per-cycle throughput, since results are expected back to back.
module masked_adder_tb;
  localparam int unsigned W   = 20;
  localparam int unsigned LAT = 5 * W;
  typedef struct packed {
    logic         sub;
    logic [W-1:0] a, b;
    logic         ci;
  } op_t;

  logic           clk = 0;
  logic           sub, ci0, ci1, co0, co1;
  logic [W-1:0]   a0, a1, b0, b1, s0, s1;
  logic [3*W-1:0] r;
  int             checks = 0, failures = 0;
  op_t            hist [$];

  masked_adder #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_t o;
    for (int cyc = 0; cyc < 1200; cyc++) begin
      @(negedge clk);
      if (hist.size() == LAT) begin
        op_t      h;
        logic [W:0] e;
        h = hist.pop_front();
        if (h.sub) e = {1'b0, h.a} + {1'b0, ~h.b} + (W+1)'(1) + (W+1)'(h.ci);
        else       e = {1'b0, h.a} + {1'b0, h.b} + (W+1)'(h.ci);
        checks++;
        if ({co0 ^ co1, s0 ^ s1} !== e) begin
          failures++;
          if (failures < 10) $display("cyc %0d sub=%b a=%0d b=%0d got %h exp %h", cyc, h.sub, h.a, h.b, {co0 ^ co1, s0 ^ s1}, e);
        end
      end
      o.sub = 1'($urandom);
      o.a   = W'($urandom);
      o.b   = W'($urandom);
      o.ci  = o.sub ? 1'b0 : 1'($urandom);
      sub   = o.sub;
      a0 = W'($urandom); a1 = o.a ^ a0;
      b0 = W'($urandom); b1 = o.b ^ b0;
      ci0 = 1'($urandom); ci1 = o.ci ^ ci0;
      r = {$urandom, $urandom};
      hist.push_back(o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
