// scrambler: 5G NR bit scrambling of the coded, interleaved bits.
//
// Each 32-bit input word is XOR-ed with the next 32 bits of the gold
// sequence in the same clock (paper, encoding procedure); the gold sequence
// comes from gold_seq_gen with W = 32. c_init is given by the host per code
// block (in TS 38.211 it is n_RNTI * 2^15 + n_ID; the paper only says it
// depends on the RNTI and the cell ID).
//
// Interface: 'init' with 'c_init' starts a code block; 'in_ready' rises once
// the generator has skipped its first 1600 bits (50 clocks). Input words carry
// 'in_nbits' valid bits (32 except for the last word of a block) and the
// generator advances by that many bits. Output is registered: one clock of
// latency, one word per clock, no backpressure.
module scrambler #(
  parameter int W = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [30:0]   c_init,
  output logic          in_ready,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  input  logic [$clog2(W+1)-1:0] in_nbits,
  input  logic          in_last,
  output logic          out_valid,
  output logic [W-1:0]  out_data,
  output logic [$clog2(W+1)-1:0] out_nbits,
  output logic          out_last
);
  logic [W-1:0] seq;
  logic [$clog2(W+1)-1:0] adv;
  logic         fire;

  assign fire = in_valid && in_ready;
  assign adv  = fire ? in_nbits : '0;

  gold_seq_gen #(.W(W)) u_gold (
    .clk, .rst_n, .init, .c_init, .adv, .ready(in_ready), .seq
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_nbits <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= fire;
      if (fire) begin
        // Bits above in_nbits are don't-care padding and are zeroed.
        for (int i = 0; i < W; i++)
          out_data[i] <= (i < int'(in_nbits)) ? (in_data[i] ^ seq[i]) : 1'b0;
        out_nbits <= in_nbits;
        out_last  <= in_last;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("scrambler: input word while generator not ready");

endmodule
