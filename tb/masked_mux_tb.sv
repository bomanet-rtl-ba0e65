// masked_mux_tb: every pixel value 0..255 with both weight values and random
// masks; checks that the output shares recombine to +pixel or -pixel (9-bit
// two's complement) and that share 0 is exactly the mask.
module masked_mux_tb;
  localparam int unsigned W = 9;
  logic [W-1:0] pos, neg, ri, out0, out1;
  logic         sel;
  int           checks = 0, failures = 0;

  masked_mux #(.W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 256; p++) begin
      for (int s = 0; s < 2; s++) begin
        for (int k = 0; k < 4; k++) begin
          logic signed [W-1:0] exp;
          pos = W'(p);
          neg = W'(-p);
          sel = 1'(s);
          ri  = W'($urandom);
          #1;
          exp = s ? W'(p) : W'(-p);
          checks++;
          if ((out0 ^ out1) !== exp || out0 !== ri) begin
            failures++;
            if (failures < 10) $display("p=%0d sel=%0d got %h exp %h", p, s, out0 ^ out1, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
