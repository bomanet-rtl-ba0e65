// masked_activation_tb: all four share combinations of the MSB; the
// activation shares must recombine to NOT msb, with share 1 passed through.
module masked_activation_tb;
  logic msb0, msb1, act0, act1;
  int   checks = 0, failures = 0;

  masked_activation dut (.*);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {msb1, msb0} = 2'(i);
      #1;
      checks++;
      if ((act0 ^ act1) !== ~(msb0 ^ msb1) || act1 !== msb1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
