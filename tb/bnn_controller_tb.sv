// bnn_controller_tb: a reduced network (5 inputs, 13 hidden nodes in groups
// of 7 slots, 2 hidden layers, 3 outputs). After start, the issue
// descriptors must match, cycle by cycle, the schedule written out below as
// plain nested loops; the bench then checks the issue count, that the output
// layer leaves idle slots, and the cycle of layers_done.
module bnn_controller_tb;
  import bomanet_pkg::*;
  localparam int unsigned N_IN = 5, N_HID = 13, N_HL = 2, N_OUT = 3, SLOTS = 7, DRAIN = 9;
  logic   clk = 0, rst_n = 0, start = 0, busy, layers_done;
  issue_t iss;
  int     checks = 0, failures = 0;

  bnn_controller #(.N_IN(N_IN), .N_HID(N_HID), .N_HLAYERS(N_HL), .N_OUT(N_OUT),
                   .SLOTS(SLOTS), .DRAIN_CYC(DRAIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  issue_t exp_q [$];

  initial begin
    int idle_out = 0, valid_cnt = 0, exp_valid = 0, cyc;
    for (int l = 0; l <= N_HL; l++) begin
      int fanin, nodes;
      fanin = (l == 0) ? N_IN : N_HID;
      nodes = (l == N_HL) ? N_OUT : N_HID;
      for (int g = 0; g * SLOTS < nodes; g++)
        for (int r = 0; r <= fanin; r++)
          for (int k = 0; k < SLOTS; k++) begin
            issue_t e;
            e.valid = (g * SLOTS + k < nodes);
            e.kind  = (r == fanin) ? OP_BIAS : ((l == 0) ? OP_MAC_PIX : OP_MAC_XNOR);
            e.first = (r == 0);
            e.layer = LAYER_W'(l);
            e.node  = NODE_W'(g * SLOTS + k);
            e.inp   = NODE_W'(r);
            e.slot  = SLOT_W'(k);
            exp_q.push_back(e);
            if (e.valid) exp_valid++;
          end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    // first descriptor is registered one clock after the controller enters RUN
    @(negedge clk);
    while (exp_q.size() > 0) begin
      issue_t e;
      e = exp_q.pop_front();
      checks++;
      if (iss.valid !== e.valid || (e.valid && iss !== e)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: got %p exp %p", cyc, iss, e);
      end
      if (iss.valid) valid_cnt++;
      if (!iss.valid && iss.layer == LAYER_W'(N_HL)) idle_out++;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (iss.valid) failures++;
    checks++;
    if (valid_cnt != exp_valid) failures++;
    checks++;
    if (idle_out == 0) failures++;  // output-layer rounds keep idle slots
    // layers_done after the drain
    cyc = 0;
    while (!layers_done && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != DRAIN) begin
      failures++;
      $display("layers_done %0d cycles after last issue", cyc);
    end
    @(negedge clk);
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
