// descrambler: removes the 5G NR scrambling from soft bits.
//
// It mirrors the scrambler but works on LLRs: each input beat holds up to 16
// 8-bit LLRs (a 128-bit vector, four 32-bit words of four LLRs), and LLR i is
// negated when gold-sequence bit n+i is 1 (a scrambling bit of 1 inverts the
// coded bit, so the sign of log(P(1)/P(0)) flips). The gold sequence comes
// from gold_seq_gen with W = 16, advancing by the beat's LLR count. Lanes
// follow the paper (up to 16 LLRs per clock); the variable count per beat
// (2*Qm LLRs from the LLR estimator) is this design's choice.
//
// Interface: 'init'/'c_init' start a code block, 'in_ready' rises after the
// 1600-bit skip (100 clocks). One clock of latency, no backpressure.
module descrambler
  import phy_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [30:0]   c_init,
  output logic          in_ready,
  input  logic          in_valid,
  input  llr_t          in_llr [LANES],
  input  logic [$clog2(LANES+1)-1:0] in_cnt,
  output logic          out_valid,
  output llr_t          out_llr [LANES],
  output logic [$clog2(LANES+1)-1:0] out_cnt
);
  logic [LANES-1:0] seq;
  logic [$clog2(LANES+1)-1:0] adv;
  logic fire;

  assign fire = in_valid && in_ready;
  assign adv  = fire ? in_cnt : '0;

  gold_seq_gen #(.W(LANES)) u_gold (
    .clk, .rst_n, .init, .c_init, .adv, .ready(in_ready), .seq
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cnt   <= '0;
      for (int i = 0; i < LANES; i++) out_llr[i] <= '0;
    end else begin
      out_valid <= fire;
      if (fire) begin
        out_cnt <= in_cnt;
        for (int i = 0; i < LANES; i++)
          out_llr[i] <= seq[i] ? -in_llr[i] : in_llr[i];
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("descrambler: input beat while generator not ready");

endmodule
