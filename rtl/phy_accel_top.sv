// phy_accel_top: the FPGA side of the PHY accelerator, an encoding chain and a
// decoding chain that sit beside the radio on the RFNoC crossbar.
//
// Encoding chain (downlink), per code block: Ncb LDPC-coded bits in 32-bit
// words -> rate_matcher (E bits from k0) -> interleaver -> scrambler -> E
// scrambled bits in 32-bit words back to the host, which modulates them.
// Decoding chain (uplink), per code block: equalised symbols, two per clock ->
// llr_estimator (13 clocks) -> descrambler (16 LLRs per clock) ->
// deinterleaver (128-bit vectors) -> rate_unmatcher (HARQ combining into one of
// 16 virtual buffers) -> 2*Zc + Ncb LLRs towards the LDPC decoder. The chains
// and their order are the paper's (Figs. 1, 2, 4).
//
// Not inside: the LDPC encoder and decoder (the decoder is the vendor's
// hardened IP core), the RFNoC crossbar, SFP+ transport and the radio; their
// streams are the ports of this module. One clock is used for everything
// here (250 MHz in the paper; the decoder IP runs at 500 MHz behind its own
// clock crossing). The control around the chains is this design's: the
// encoding chain takes a configuration when it is idle and configures all its
// stages at once; the decoding chain takes one when the deinterleaver is idle,
// takes exactly G = E/Qm symbols for it ('sym_ready'), and hands the rate-
// unmatching part to the rate unmatcher when that has finished the previous
// block, so consecutive blocks overlap.
module phy_accel_top
  import phy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // Encoding chain.
  input  logic        enc_cfg_valid,
  output logic        enc_cfg_ready,
  input  enc_cfg_t    enc_cfg,
  input  logic        enc_in_valid,
  output logic        enc_in_ready,
  input  logic [31:0] enc_in_data,
  output logic        enc_out_valid,
  output logic [31:0] enc_out_data,
  output logic [5:0]  enc_out_nbits,
  output logic        enc_out_last,
  // Decoding chain.
  input  logic        dec_cfg_valid,
  output logic        dec_cfg_ready,
  input  dec_cfg_t    dec_cfg,
  input  logic        sym_valid,
  output logic        sym_ready,
  input  logic        sym_two,
  input  logic signed [15:0] sym_i [2],
  input  logic signed [15:0] sym_q [2],
  output logic        dec_out_valid,
  output llr_t        dec_out_llr [16],
  output logic [4:0]  dec_out_cnt,
  output logic        dec_out_last
);
  // ---------------- Encoding chain ----------------
  logic enc_go, rm_cfg_ready, il_cfg_ready, scr_ready;
  logic        rm_valid, rm_last;
  logic [31:0] rm_data;
  logic [5:0]  rm_nbits;
  logic        il_valid, il_last;
  logic [31:0] il_data;
  logic [5:0]  il_nbits;

  assign enc_cfg_ready = rm_cfg_ready && il_cfg_ready;
  assign enc_go        = enc_cfg_valid && enc_cfg_ready;

  rate_matcher u_rate_matcher (
    .clk, .rst_n,
    .cfg_valid(enc_go), .cfg_ready(rm_cfg_ready),
    .cfg_ncb(enc_cfg.ncb), .cfg_e(enc_cfg.e), .cfg_k0(enc_cfg.k0),
    .in_valid(enc_in_valid), .in_ready(enc_in_ready), .in_data(enc_in_data),
    .out_ready(1'b1),
    .out_valid(rm_valid), .out_data(rm_data), .out_nbits(rm_nbits), .out_last(rm_last)
  );

  interleaver u_interleaver (
    .clk, .rst_n,
    .cfg_valid(enc_go), .cfg_ready(il_cfg_ready),
    .cfg_e(enc_cfg.e), .cfg_mod(enc_cfg.mod),
    .in_valid(rm_valid), .in_data(rm_data), .in_nbits(rm_nbits), .in_last(rm_last),
    .out_ready(scr_ready),
    .out_valid(il_valid), .out_data(il_data), .out_nbits(il_nbits), .out_last(il_last)
  );

  scrambler u_scrambler (
    .clk, .rst_n,
    .init(enc_go), .c_init(enc_cfg.c_init),
    .in_ready(scr_ready),
    .in_valid(il_valid), .in_data(il_data), .in_nbits(il_nbits), .in_last(il_last),
    .out_valid(enc_out_valid), .out_data(enc_out_data), .out_nbits(enc_out_nbits),
    .out_last(enc_out_last)
  );

  // ---------------- Decoding chain ----------------
  logic        dec_go, di_cfg_ready, ru_cfg_ready, ds_ready;
  mod_t        dmod;
  logic [15:0] dscale;
  logic [15:0] sym_left;
  logic        sym_fire;

  logic        le_valid;
  llr_t        le_llr [16];
  logic [4:0]  le_cnt;
  logic        ds_valid;
  llr_t        ds_llr [16];
  logic [4:0]  ds_cnt;
  logic        di_valid, di_last, ru_in_ready;
  llr_t        di_llr [16];
  logic [4:0]  di_cnt;
  logic        ru_split;
  logic        ru_pend_v, ru_go;
  dec_cfg_t    ru_pend;
  logic        di_in_ready;

  // The symbol count per block guarantees the deinterleaver is loading
  // whenever descrambled LLRs arrive.
  assert property (@(posedge clk) disable iff (!rst_n) ds_valid |-> di_in_ready)
    else $error("phy_accel_top: LLRs arrived outside a block");

  // A block's rate-unmatching parameters wait in ru_pend until the rate
  // unmatcher is free, so the next block can be loaded into the LLR estimator
  // and deinterleaver while the rate unmatcher still reads out the previous
  // one.
  assign dec_cfg_ready = di_cfg_ready && !ru_pend_v && (sym_left == 0);
  assign ru_go         = ru_pend_v && ru_cfg_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ru_pend_v <= 1'b0;
      ru_pend   <= '0;
    end else if (dec_go) begin
      ru_pend_v <= 1'b1;
      ru_pend   <= dec_cfg;
    end else if (ru_go) begin
      ru_pend_v <= 1'b0;
    end
  end
  assign dec_go        = dec_cfg_valid && dec_cfg_ready;
  assign sym_ready     = (sym_left != 0) && ds_ready;
  assign sym_fire      = sym_valid && sym_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dmod <= MOD_QPSK; dscale <= '0; sym_left <= '0;
    end else if (dec_go) begin
      dmod     <= dec_cfg.mod;
      dscale   <= dec_cfg.scale;
      sym_left <= div_qm(dec_cfg.e, dec_cfg.mod);
    end else if (sym_fire) begin
      sym_left <= sym_left - ((sym_two && sym_left >= 16'd2) ? 16'd2 : 16'd1);
    end
  end

  llr_estimator u_llr_estimator (
    .clk, .rst_n,
    .mod(dmod), .scale(dscale),
    .in_valid(sym_fire), .in_two(sym_two && sym_left >= 16'd2),
    .in_i(sym_i), .in_q(sym_q),
    .out_valid(le_valid), .out_llr(le_llr), .out_cnt(le_cnt)
  );

  descrambler u_descrambler (
    .clk, .rst_n,
    .init(dec_go), .c_init(dec_cfg.c_init),
    .in_ready(ds_ready),
    .in_valid(le_valid), .in_llr(le_llr), .in_cnt(le_cnt),
    .out_valid(ds_valid), .out_llr(ds_llr), .out_cnt(ds_cnt)
  );

  deinterleaver u_deinterleaver (
    .clk, .rst_n,
    .cfg_valid(dec_go), .cfg_ready(di_cfg_ready),
    .cfg_e(dec_cfg.e), .cfg_mod(dec_cfg.mod),
    .in_valid(ds_valid), .in_ready(di_in_ready), .in_llr(ds_llr), .in_cnt(ds_cnt),
    .out_ready(ru_in_ready),
    .out_valid(di_valid), .out_llr(di_llr), .out_cnt(di_cnt), .out_last(di_last)
  );

  rate_unmatcher u_rate_unmatcher (
    .clk, .rst_n,
    .cfg_valid(ru_go), .cfg_ready(ru_cfg_ready),
    .cfg_buf(ru_pend.buf_id), .cfg_new(ru_pend.new_tx), .cfg_e(ru_pend.e),
    .cfg_k0(ru_pend.k0), .cfg_ncb(ru_pend.ncb), .cfg_zc2(ru_pend.zc2),
    .cfg_fill_start(ru_pend.fill_start), .cfg_fill_len(ru_pend.fill_len),
    .in_valid(di_valid), .in_ready(ru_in_ready), .in_llr(di_llr), .in_cnt(di_cnt),
    .out_valid(dec_out_valid), .out_llr(dec_out_llr), .out_cnt(dec_out_cnt),
    .out_last(dec_out_last), .split_stall(ru_split)
  );

endmodule
