// deinterleaver: reverses the 5G NR bit interleaver on LLRs and widens the
// stream to 16 LLRs (128 bits) per clock for the LDPC decoder side.
//
// Incoming LLRs are in symbol order: LLR k*Qm + l is bit l of symbol k, which
// is code-block bit l*G + k (G = E/Qm). Following the paper, the LLRs are
// stored in four sets of 8 buffers of 32-bit words (four 8-bit LLRs each):
// buffer l of every set holds row l. Within a row, LLR k goes to set
// (k/4) mod 4, word k/16, byte k mod 4. Reading word w of row l from all four
// sets at once gives LLRs k = 16w .. 16w+15, one 128-bit vector per clock, so
// no word straddles two buffers. The row length G need not be a multiple of
// 16: the last vector of each row carries out_cnt < 16 LLRs (this partial-
// vector convention is this design's choice).
//
// Input beats come from the LLR estimator / descrambler: 2 symbols (2*Qm LLRs)
// per clock, or one symbol for the last beat of an odd G; k is even at every
// beat, so each buffer takes at most one (byte-enabled) write per clock.
// DEPTH = 768 words per buffer follows from the paper's 24 BRAM36 for 32
// buffers (24 * 32 Kib / 32 / 32 bits); G may be up to 16*DEPTH.
//
// Interface: 'cfg_valid' (E, modulation) when 'cfg_ready'; then LLR beats
// while 'in_ready'. After E LLRs the block is read out row by row; 'out_ready'
// is a level (almost-full) from the next stage checked before each read, and
// up to two reads may still be in flight when it drops. 'out_last' marks the
// final vector. The next block can be loaded once readout has finished.
module deinterleaver
  import phy_pkg::*;
#(
  parameter int SETS   = 4,
  parameter int GROUPS = 8,
  parameter int DEPTH  = 768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  logic [15:0] cfg_e,
  input  mod_t        cfg_mod,
  input  logic        in_valid,
  output logic        in_ready,
  input  llr_t        in_llr [16],
  input  logic [4:0]  in_cnt,
  input  logic        out_ready,
  output logic        out_valid,
  output llr_t        out_llr [16],
  output logic [4:0]  out_cnt,
  output logic        out_last
);
  localparam int AW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_READ, S_FLUSH} state_t;
  state_t state;


  logic [3:0]  qm;
  logic [15:0] g;        // LLRs per row
  logic [15:0] k;        // next symbol index while loading
  logic [3:0]  rrow;     // row being read
  logic [15:0] rword;    // word being read
  logic [15:0] nwords;   // words per row

  // Read pipeline (registered memory output).
  logic        p1_v, p2_v;
  logic [4:0]  p1_cnt, p2_cnt;
  logic        p1_last, p2_last;
  logic [3:0]  rrow_q;   // row of the read in flight
  logic [31:0] rd2 [SETS];

  logic        rd_issue;
  logic [15:0] rleft;
  logic [AW-1:0] waddr;
  logic [1:0]  wset;

  assign cfg_ready = (state == S_IDLE);
  assign in_ready  = (state == S_LOAD);
  assign rd_issue  = (state == S_READ) && out_ready;
  assign rleft     = g - (rword << 4);
  assign waddr     = AW'(k >> 4);
  assign wset      = k[3:2];

  // Buffers: at most one byte-enabled write per buffer per clock. Lane of
  // symbol y, bit l of the input beat is y*Qm + l.
  logic [3:0]  b_we   [GROUPS];
  logic [31:0] b_wd   [GROUPS];
  logic [31:0] b_rd   [SETS][GROUPS];

  always_comb begin
    for (int l = 0; l < GROUPS; l++) begin
      b_we[l] = '0;
      b_wd[l] = '0;
      for (int y = 0; y < 2; y++) begin
        if (in_valid && in_ready && l < int'(qm) && y * int'(qm) + l < int'(in_cnt)) begin
          b_we[l][2'(k[1:0] + 2'(y))] = 1'b1;
          b_wd[l][8*int'(2'(k[1:0] + 2'(y))) +: 8] = in_llr[(y*int'(qm) + l) % 16];
        end
      end
    end
  end

  for (genvar s = 0; s < SETS; s++) begin : g_set
    for (genvar l = 0; l < GROUPS; l++) begin : g_buf
      bram #(.DW(32), .DEPTH(DEPTH), .NBYTE(4)) u_buf (
        .clk,
        .we((wset == 2'(s)) ? b_we[l] : 4'b0000), .waddr(waddr), .wdata(b_wd[l]),
        .raddr_a(AW'(rword)), .rdata_a(b_rd[s][l]),
        .raddr_b('0), .rdata_b()
      );
    end
  end

  // Registered output stage after the buffers' registered read.
  always_ff @(posedge clk)
    for (int s = 0; s < SETS; s++) rd2[s] <= b_rd[s][rrow_q[2:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; qm <= 4'd2; g <= '0; k <= '0;
      rrow <= '0; rword <= '0; nwords <= '0; rrow_q <= '0;
      p1_v <= 1'b0; p2_v <= 1'b0; p1_cnt <= '0; p2_cnt <= '0; p1_last <= 1'b0; p2_last <= 1'b0;
    end else begin
      p2_v <= p1_v; p2_cnt <= p1_cnt; p2_last <= p1_last;
      rrow_q <= rrow;
      p1_v <= rd_issue;
      p1_cnt <= (rleft >= 16'd16) ? 5'd16 : 5'(rleft);
      p1_last <= (rrow == qm - 1) && (rword == nwords - 1);
      case (state)
        S_IDLE: if (cfg_valid) begin
          qm <= 4'(qm_of(cfg_mod));
          g  <= div_qm(cfg_e, cfg_mod);
          nwords <= (div_qm(cfg_e, cfg_mod) + 16'd15) >> 4;
          k <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          k <= k + ((in_cnt > 5'(qm)) ? 16'd2 : 16'd1);
          if (k + ((in_cnt > 5'(qm)) ? 16'd2 : 16'd1) >= g) begin
            rrow <= '0; rword <= '0;
            state <= S_READ;
          end
        end
        S_READ: if (rd_issue) begin
          if (rword == nwords - 1) begin
            rword <= '0;
            if (rrow == qm - 1) state <= S_FLUSH;
            rrow <= rrow + 1'b1;
          end else begin
            rword <= rword + 1'b1;
          end
        end
        S_FLUSH: if (!p1_v && !p2_v) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid = p2_v;
  assign out_cnt   = p2_cnt;
  assign out_last  = p2_last;
  always_comb
    for (int s = 0; s < SETS; s++)
      for (int b = 0; b < 4; b++)
        out_llr[4*s + b] = llr_t'(rd2[s][8*b +: 8]);

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_IDLE && cfg_valid) |-> (div_qm(cfg_e, cfg_mod) <= 16'(16*DEPTH)))
    else $error("deinterleaver: E/Qm too large for the buffers");
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("deinterleaver: input beat while not loading");

endmodule
