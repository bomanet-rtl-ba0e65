// delay_line: W-bit shift register of DEPTH stages (DEPTH = 0 is a wire).
//
// Used for the 5-cycle operand and sum delays of the pipelined masked adder
// and for the control tag that travels alongside it. No reset: it carries
// data only, and its output is ignored until valid data has reached it.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int unsigned i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[DEPTH-1];
  end
endmodule
