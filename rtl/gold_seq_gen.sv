// gold_seq_gen: length-31 gold sequence generator of TS 38.211 clause 5.2.1,
// producing W sequence bits per clock.
//
// c(n) = x1(n+Nc) ^ x2(n+Nc), Nc = 1600, with x1(n+31) = x1(n+3) ^ x1(n) and
// x2(n+31) = x2(n+3) ^ x2(n+2) ^ x2(n+1) ^ x2(n); x1 starts at 1,0,...,0 and
// x2 at c_init. The two 31-bit shift registers are unrolled W steps per clock.
//
// Interface: a one-cycle 'init' loads c_init; the generator then runs Nc/W
// clocks to skip the first Nc bits, with 'ready' low. Once 'ready' is high,
// 'seq[i]' is sequence bit n+i for the current position n, and 'adv' (0..W)
// moves the position forward by that many bits at the next clock edge. So the
// user consumes a variable number of bits per cycle (a partial last word, or
// a beat holding fewer LLRs). Consuming W bits per cycle is what the paper
// describes (32-bit segments per clock in the scrambler); the fast-forward
// after init and the variable advance are choices of this design.
module gold_seq_gen #(
  parameter int W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic [30:0]          c_init,
  input  logic [$clog2(W+1)-1:0] adv,
  output logic                 ready,
  output logic [W-1:0]         seq
);
  import phy_pkg::*;

  localparam int FF_CYCLES = GOLD_NC / W;

  logic [30:0] x1_q, x2_q;
  logic [30:0] x1_st [W+1];
  logic [30:0] x2_st [W+1];
  logic [$clog2(FF_CYCLES+1)-1:0] ff_cnt;

  // Unrolled LFSR states after 0..W steps.
  always_comb begin
    x1_st[0] = x1_q;
    x2_st[0] = x2_q;
    for (int i = 0; i < W; i++) begin
      x1_st[i+1] = {x1_st[i][3] ^ x1_st[i][0], x1_st[i][30:1]};
      x2_st[i+1] = {x2_st[i][3] ^ x2_st[i][2] ^ x2_st[i][1] ^ x2_st[i][0], x2_st[i][30:1]};
      seq[i]     = x1_st[i][0] ^ x2_st[i][0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1_q   <= 31'd1;
      x2_q   <= '0;
      ff_cnt <= '0;
      ready  <= 1'b0;
    end else if (init) begin
      x1_q   <= 31'd1;
      x2_q   <= c_init;
      ff_cnt <= ($clog2(FF_CYCLES+1))'(FF_CYCLES);
      ready  <= 1'b0;
    end else if (ff_cnt != 0) begin
      x1_q   <= x1_st[W];
      x2_q   <= x2_st[W];
      ff_cnt <= ff_cnt - 1'b1;
      ready  <= (ff_cnt == 1);
    end else if (ready) begin
      x1_q <= x1_st[adv];
      x2_q <= x2_st[adv];
    end
  end

  initial assert (GOLD_NC % W == 0) else $error("W must divide Nc = 1600");

endmodule
