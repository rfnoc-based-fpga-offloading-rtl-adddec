// rate_matcher: 5G NR circular-buffer rate matching of one LDPC code block.
//
// The Ncb coded bits (the first 2*Zc bits already punctured) are written into
// a circular buffer of MEM_WORDS 32-bit words (one BRAM36 holding 792 words,
// 792*32 = 66*384 bits, the largest circular buffer). E bits are
// then read starting at bit k0 (set by the redundancy version), wrapping at
// Ncb; when E > Ncb bits are repeated. This follows the paper.
//
// How it reads: each memory read returns one 32-bit word of which a chunk of
// 1..32 bits is used (a shorter chunk at k0, at the wrap point when Ncb is not
// a multiple of 32, and at the end). A barrel shifter appends the chunk to a
// 192-bit bit accumulator, from which full 32-bit words are emitted, one per
// clock. Reads are issued only when the accumulator plus the chunks still in
// flight can hold another word, so nothing is lost to the two-clock read
// latency (registered BRAM output). Filler bits are not skipped (the paper
// does not mention skipping them); this is this design's simplification.
//
// Interface: 'cfg_valid' with Ncb, E, k0 starts a block when 'cfg_ready'.
// The block's ceil(Ncb/32) input words are then taken while 'in_ready'.
// Output words carry 'out_nbits' valid bits (32 but for the last word) and
// 'out_last'. 'out_ready' (level) holds output back before reading starts;
// once reading has started there is no backpressure.
module rate_matcher #(
  parameter int MEM_WORDS = 792
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  logic [15:0] cfg_ncb,
  input  logic [15:0] cfg_e,
  input  logic [15:0] cfg_k0,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        out_ready,
  output logic        out_valid,
  output logic [31:0] out_data,
  output logic [5:0]  out_nbits,
  output logic        out_last
);
  localparam int AW = $clog2(MEM_WORDS);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_WAIT, S_READ} state_t;
  state_t state;

  logic [15:0] ncb, e, k0;

  // Load side.
  logic [AW-1:0] wr_addr;
  logic [15:0]   load_words;

  // Read side.
  logic [15:0]  pos;        // circular bit position of next chunk
  logic [15:0]  to_fetch;   // bits not yet requested
  logic [15:0]  to_emit;    // bits not yet emitted
  logic [7:0]   level;      // bits in accumulator
  logic [7:0]   inflight;   // bits requested, not yet in accumulator
  logic [191:0] acc;

  // Two-stage read pipeline: address stage and registered memory output.
  logic        r1_v, r2_v;
  logic [4:0]  r1_sb, r2_sb;
  logic [5:0]  r1_len, r2_len;
  logic [31:0] r1_q, r2_q;

  logic [5:0]  chunk_len;
  logic [15:0] room_to_wrap;
  logic        issue;
  logic        emit;
  logic [7:0]  level_after_emit;
  logic [191:0] acc_after_emit;

  always_comb begin
    room_to_wrap = ncb - pos;
    chunk_len = 6'd32 - 6'(pos[4:0]);
    if (16'(chunk_len) > room_to_wrap) chunk_len = 6'(room_to_wrap);
    if (16'(chunk_len) > to_fetch)     chunk_len = 6'(to_fetch);
    issue = (state == S_READ) && (to_fetch != 0) &&
            (int'(level) + int'(inflight) + int'(chunk_len) <= 192);
    emit  = (state == S_READ) && (to_emit != 0) &&
            ((level >= 8'd32) || (16'(level) == to_emit && level != 0));
    level_after_emit = emit ? (level - ((level >= 8'd32) ? 8'd32 : level)) : level;
    acc_after_emit   = emit ? (acc >> 32) : acc;
  end

  assign cfg_ready = (state == S_IDLE);
  assign in_ready  = (state == S_LOAD);

  bram #(.DW(32), .DEPTH(MEM_WORDS)) u_mem (
    .clk,
    .we(in_valid && in_ready), .waddr(wr_addr), .wdata(in_data),
    .raddr_a(AW'(pos >> 5)), .rdata_a(r1_q),
    .raddr_b('0), .rdata_b()
  );

  always_ff @(posedge clk) r2_q <= r1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ncb <= '0; e <= '0; k0 <= '0;
      wr_addr <= '0; load_words <= '0;
      pos <= '0; to_fetch <= '0; to_emit <= '0; level <= '0; inflight <= '0;
      acc <= '0;
      r1_v <= 1'b0; r2_v <= 1'b0; r1_sb <= '0; r2_sb <= '0; r1_len <= '0; r2_len <= '0;
      out_valid <= 1'b0; out_data <= '0; out_nbits <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      case (state)
        S_IDLE: if (cfg_valid) begin
          ncb <= cfg_ncb; e <= cfg_e; k0 <= cfg_k0;
          wr_addr <= '0;
          load_words <= (cfg_ncb + 16'd31) >> 5;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          wr_addr <= wr_addr + 1'b1;
          if (load_words == 1) state <= S_WAIT;
          load_words <= load_words - 1'b1;
        end
        S_WAIT: if (out_ready) begin
          pos <= k0; to_fetch <= e; to_emit <= e;
          level <= '0; inflight <= '0; acc <= '0;
          state <= S_READ;
        end
        S_READ: begin
          // Request.
          r1_v   <= issue;
          r1_sb  <= pos[4:0];
          r1_len <= chunk_len;
          if (issue) begin
            to_fetch <= to_fetch - 16'(chunk_len);
            pos <= (16'(chunk_len) == room_to_wrap) ? 16'd0 : pos + 16'(chunk_len);
          end
          // Registered memory output stage.
          r2_v <= r1_v; r2_sb <= r1_sb; r2_len <= r1_len;
          // Emit and append.
          if (emit) begin
            out_valid <= 1'b1;
            out_data  <= acc[31:0];
            out_nbits <= (level >= 8'd32) ? 6'd32 : 6'(level);
            out_last  <= (to_emit <= 16'd32);
            to_emit   <= to_emit - ((level >= 8'd32) ? 16'd32 : 16'(level));
          end
          begin
            logic [191:0] chunk;
            chunk = {160'd0, (r2_q >> r2_sb) & 32'((33'h1 << r2_len) - 33'h1)};
            acc   <= r2_v ? (acc_after_emit | (chunk << level_after_emit)) : acc_after_emit;
            level <= level_after_emit + (r2_v ? 8'(r2_len) : 8'd0);
          end
          inflight <= inflight + (issue ? 8'(chunk_len) : 8'd0) - (r2_v ? 8'(r2_len) : 8'd0);
          if (emit && to_emit <= 16'd32) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_IDLE && cfg_valid) |-> (cfg_ncb <= 16'(MEM_WORDS*32) && cfg_ncb != 0 && cfg_k0 < cfg_ncb))
    else $error("rate_matcher: Ncb or k0 out of range");

endmodule
