// masked_xnor_tb: all share and weight combinations; the 20-bit output shares
// must recombine to the zero-extended XNOR of activation and weight.
module masked_xnor_tb;
  localparam int unsigned W = 20;
  logic         act0, act1, w;
  logic [W-1:0] out0, out1;
  int           checks = 0, failures = 0;

  masked_xnor #(.W(W)) dut (.*);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      {w, act1, act0} = 3'(i);
      #1;
      checks++;
      if ((out0 ^ out1) !== W'(~(act0 ^ act1 ^ w) & 1'b1)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
