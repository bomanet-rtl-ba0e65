// trichina_x32_tb: 32 independent Trichina AND gates driven by the same
// masked inputs, the arrangement used to raise the signal-to-noise ratio of
// a single gate in a leakage measurement.
//
// Every cycle the bench draws a secret (a, b), splits each into two fresh
// shares, and gives every gate its own random bit r. It checks:
//   - each gate's c0 ^ c1 equals a & b of the inputs 4 cycles earlier
//     (latency 4, one new operation per cycle);
//   - a first-order statistic: the mean Hamming weight of all 32 c1 shares
//     is the same, within a tolerance, whether a & b is 0 or 1;
//   - a second-order statistic: the covariance of the Hamming weights of the
//     c0 and c1 shares has opposite signs for a & b = 0 and 1. A two-share
//     masking is expected to leak at second order, so this must show.
// The Hamming weight stands in for the power draw of the share registers.
// The gate count (32) follows the published measurement set-up; the
// statistics are this bench's simple stand-in for a t-test.
module trichina_x32_tb;
  localparam int unsigned NG   = 32;
  localparam int unsigned LAT  = 4;
  localparam int unsigned NSMP = 20000;

  logic          clk = 1'b0;
  logic          a0, a1, b0, b1;
  logic [NG-1:0] r, c0, c1;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < NG; g++) begin : g_gate
    trichina_and u_tg (
      .clk, .r(r[g]), .a0, .a1, .b0, .b1, .c0(c0[g]), .c1(c1[g])
    );
  end

  // Watchdog.
  initial begin
    repeat (NSMP + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic        secret [$];
    logic        a, b, s;
    real         n     [2];
    real         sum1  [2];
    real         sum0  [2];
    real         sum01 [2];
    real         m0, m1, cov [2];
    int          h0, h1;
    a0 = 1'b0; a1 = 1'b0; b0 = 1'b0; b1 = 1'b0; r = '0;
    for (int k = 0; k < 2; k++) begin
      n[k] = 0.0; sum0[k] = 0.0; sum1[k] = 0.0; sum01[k] = 0.0;
    end
    for (int t = 0; t < NSMP + LAT; t++) begin
      // Outputs of the operation issued LAT cycles ago.
      if (t >= LAT) begin
        s = secret.pop_front();
        h0 = $countones(c0);
        h1 = $countones(c1);
        for (int g = 0; g < NG; g++) begin
          checks++;
          if ((c0[g] ^ c1[g]) != s) failures++;
        end
        n[s]     += 1.0;
        sum0[s]  += real'(h0);
        sum1[s]  += real'(h1);
        sum01[s] += real'(h0) * real'(h1);
      end
      a  = 1'($urandom);
      b  = 1'($urandom);
      a0 = 1'($urandom); a1 = a ^ a0;
      b0 = 1'($urandom); b1 = b ^ b0;
      r  = NG'($urandom);
      secret.push_back(a & b);
      @(posedge clk);
      #1;
    end
    // First order: mean Hamming weight of share 1 must not depend on a & b.
    m0 = sum1[0] / n[0];
    m1 = sum1[1] / n[1];
    checks++;
    if (m0 - m1 > 0.3 || m1 - m0 > 0.3) begin
      failures++;
      $display("first-order difference: %f vs %f", m0, m1);
    end
    // Second order: the share covariance flips sign with a & b.
    for (int k = 0; k < 2; k++)
      cov[k] = sum01[k] / n[k] - (sum0[k] / n[k]) * (sum1[k] / n[k]);
    checks++;
    if (!(cov[0] > 4.0 && cov[1] < -4.0)) begin
      failures++;
      $display("second-order covariance: %f / %f", cov[0], cov[1]);
    end
    $display("mean HW(c1): %f / %f, cov(HW c0, HW c1): %f / %f",
             m0, m1, cov[0], cov[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
