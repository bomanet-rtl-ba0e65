// trivium_prng: TRIVIUM keystream generator used as the mask source.
//
// The 288-bit TRIVIUM state (three shift registers of 93, 84 and 111 bits with
// AND-XOR feedback) is loaded with an 80-bit key and 80-bit IV, clocked 4*288
// steps without output (warm-up), and then yields one keystream bit per step.
// The step is unrolled OUT_W times so that OUT_W fresh bits leave per clock;
// TRIVIUM's taps allow up to 64 steps per clock without changing the result.
// Bit j of rnd is the j-th keystream bit of that clock.
//
// State numbering follows the cipher's specification, s_1..s_288, stored as
// s[i-1]. key[i] is K_{i+1} and iv[i] is IV_{i+1}.
//
// Interface: load (one cycle) takes key and iv and starts the warm-up; ready
// rises when it is over (4*288/OUT_W cycles later) and stays high while the
// generator runs. en = 0 forces rnd to zero, which switches the masking off
// (used for leakage tests of an unprotected run). The state advances every
// clock once loaded.
// The choice of TRIVIUM is the paper's; OUT_W, the enable and the reset
// behaviour are this design's.
module trivium_prng #(
  parameter int unsigned OUT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [79:0]      key,
  input  logic [79:0]      iv,
  input  logic             en,
  output logic             ready,
  output logic [OUT_W-1:0] rnd
);
  localparam int unsigned WARM_STEPS = 4 * 288;
  localparam int unsigned WARM_CYC   = (WARM_STEPS + OUT_W - 1) / OUT_W;
  localparam int unsigned CNT_W      = $clog2(WARM_CYC + 1);

  logic [287:0]     s, s_next;
  logic [OUT_W-1:0] z;
  logic [CNT_W-1:0] warm_cnt;
  logic             loaded;

  // OUT_W unrolled TRIVIUM steps
  always_comb begin
    logic [287:0] t;
    logic         t1, t2, t3;
    t = s;
    for (int unsigned j = 0; j < OUT_W; j++) begin
      t1   = t[65]  ^ t[92];
      t2   = t[161] ^ t[176];
      t3   = t[242] ^ t[287];
      z[j] = t1 ^ t2 ^ t3;
      t1   = t1 ^ (t[90]  & t[91])  ^ t[170];
      t2   = t2 ^ (t[174] & t[175]) ^ t[263];
      t3   = t3 ^ (t[285] & t[286]) ^ t[68];
      t = {t[286:177], t2, t[175:93], t1, t[91:0], t3};
    end
    s_next = t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s        <= '0;
      warm_cnt <= '0;
      loaded   <= 1'b0;
    end else if (load) begin
      s           <= '0;
      s[79:0]     <= key;
      s[172:93]   <= iv;
      s[287:285]  <= 3'b111;
      warm_cnt    <= CNT_W'(WARM_CYC);
      loaded      <= 1'b1;
    end else if (loaded) begin
      s <= s_next;
      if (warm_cnt != 0) warm_cnt <= warm_cnt - 1'b1;
    end
  end

  assign ready = loaded && (warm_cnt == 0);
  assign rnd   = en ? z : '0;
endmodule
