// interleaver: 5G NR bit interleaver (TS 38.212 clause 5.4.2.2).
//
// The E rate-matched bits are viewed as Qm rows of G = E/Qm bits; output group
// k (one modulation symbol) is the bits k + l*G, l = 0..Qm-1, so bits of one
// symbol are spread over the code block. The paper stores the block in one
// BRAM36 of 1024 32-bit words and uses barrel shifters for the case where G
// is not a multiple of 32; this module does the same.
//
// How it reads: for column block j (bits 32j..32j+31 of each row) it reads,
// for every row l, the two words holding bits l*G+32j .. l*G+32j+31 through the
// memory's two read ports and shifts them into one 32-bit chunk. When the Qm
// chunks are in, they are transposed (output bit i*Qm+l = chunk l bit i) into
// an output buffer of Qm words, which is sent one word per clock while the
// next block is read. Reads take two clocks (registered memory output), so a
// block of Qm words costs about Qm+3 clocks; this scheduling is this design's.
//
// Interface: 'cfg_valid' with E and the modulation starts a block when
// 'cfg_ready'. Input words (from the rate matcher) carry 'in_nbits' and
// 'in_last'; the block is loaded until 'in_last'. Reading starts when
// 'out_ready' (level) is high; output words are dense, 32 bits but for the
// last one, with no backpressure.
module interleaver
  import phy_pkg::*;
#(
  parameter int MEM_WORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  logic [15:0] cfg_e,
  input  mod_t        cfg_mod,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  input  logic [5:0]  in_nbits,
  input  logic        in_last,
  input  logic        out_ready,
  output logic        out_valid,
  output logic [31:0] out_data,
  output logic [5:0]  out_nbits,
  output logic        out_last
);
  localparam int AW = $clog2(MEM_WORDS);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_START, S_ISSUE, S_WAIT, S_DRAIN} state_t;
  state_t state;

  logic [AW-1:0] wr_addr;

  logic [15:0] g;
  mod_t        md;
  logic [3:0]  qm;
  logic [15:0] col;        // 32*j
  logic [3:0]  row;        // l
  logic [15:0] row_base;   // l*G
  logic [15:0] start_bit;
  logic [5:0]  v;          // valid columns in this block

  // Read pipeline: two read ports, registered output.
  logic [31:0] rd_a, rd_b, rd_a2, rd_b2;
  logic        p1_v, p2_v;
  logic [4:0]  p1_sb, p2_sb;
  logic [3:0]  p1_row, p2_row;
  logic [31:0] chunk [8];
  logic [3:0]  landed;

  // Output buffer.
  logic [255:0] ob;
  logic [3:0]   ob_words;
  logic [8:0]   ob_bits;
  logic         ob_final;
  logic [255:0] tr;
  logic [8:0]   tr_bits;

  assign start_bit = row_base + col;
  assign cfg_ready = (state == S_IDLE);

  // Transpose of the collected chunks, one candidate per modulation order.
  always_comb begin
    tr = '0;
    for (int t = 0; t < 256; t++) begin
      case (md)
        MOD_QPSK:  if (t < 64)  tr[t] = chunk[t % 2][t / 2];
        MOD_16QAM: if (t < 128) tr[t] = chunk[t % 4][t / 4];
        MOD_64QAM: if (t < 192) tr[t] = chunk[t % 6][t / 6];
        default:              tr[t] = chunk[t % 8][t / 8];
      endcase
    end
    tr_bits = 9'(int'(qm) * int'(v));
  end

  // One BRAM36: the write port loads the block, both ports read while
  // interleaving.
  bram #(.DW(32), .DEPTH(MEM_WORDS)) u_mem (
    .clk,
    .we(in_valid && state == S_LOAD), .waddr(wr_addr), .wdata(in_data),
    .raddr_a(AW'(start_bit >> 5)), .rdata_a(rd_a),
    .raddr_b(AW'((start_bit >> 5) + 16'd1)), .rdata_b(rd_b)
  );

  always_ff @(posedge clk) begin
    rd_a2 <= rd_a;
    rd_b2 <= rd_b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      wr_addr <= '0; g <= '0; md <= MOD_QPSK; qm <= 4'd2;
      col <= '0; row <= '0; row_base <= '0; v <= '0;
      p1_v <= 1'b0; p2_v <= 1'b0; p1_sb <= '0; p2_sb <= '0; p1_row <= '0; p2_row <= '0;
      landed <= '0;
      for (int l = 0; l < 8; l++) chunk[l] <= '0;
      ob <= '0; ob_words <= '0; ob_bits <= '0; ob_final <= 1'b0;
      out_valid <= 1'b0; out_data <= '0; out_nbits <= '0; out_last <= 1'b0;
    end else begin
      // Read pipeline bookkeeping (runs in every state).
      p2_v <= p1_v; p2_sb <= p1_sb; p2_row <= p1_row;
      p1_v <= 1'b0;
      if (p2_v) begin
        chunk[p2_row[2:0]] <= 32'({rd_b2, rd_a2} >> p2_sb);
        landed <= landed + 1'b1;
      end

      // Output buffer: one word per clock.
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (ob_words != 0) begin
        out_valid <= 1'b1;
        out_data  <= ob[31:0];
        out_nbits <= (ob_bits >= 9'd32) ? 6'd32 : 6'(ob_bits);
        out_last  <= ob_final && (ob_words == 1);
        ob        <= ob >> 32;
        ob_bits   <= (ob_bits >= 9'd32) ? ob_bits - 9'd32 : 9'd0;
        ob_words  <= ob_words - 1'b1;
      end

      case (state)
        S_IDLE: if (cfg_valid) begin
          md <= cfg_mod; qm <= 4'(qm_of(cfg_mod));
          g <= div_qm(cfg_e, cfg_mod);
          wr_addr <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          wr_addr <= wr_addr + 1'b1;
          if (in_last) state <= S_START;
        end
        S_START: if (out_ready) begin
          col <= '0; row <= '0; row_base <= '0; landed <= '0;
          v <= (g >= 16'd32) ? 6'd32 : 6'(g);
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          p1_v <= 1'b1; p1_sb <= start_bit[4:0]; p1_row <= row;
          if (row == qm - 1) begin
            row <= '0; row_base <= '0;
            state <= S_WAIT;
          end else begin
            row <= row + 1'b1; row_base <= row_base + g;
          end
        end
        S_WAIT: if (landed == qm && (ob_words == 0 || (ob_words == 1))) begin
          // Hand the block to the output buffer (its last word leaves now).
          ob       <= tr;
          ob_bits  <= tr_bits;
          ob_words <= 4'((int'(tr_bits) + 31) / 32);
          ob_final <= (col + 16'd32 >= g);
          landed   <= '0;
          if (col + 16'd32 >= g) begin
            state <= S_DRAIN;
          end else begin
            col <= col + 16'd32;
            v <= (g - col - 16'd32 >= 16'd32) ? 6'd32 : 6'(g - col - 16'd32);
            state <= S_ISSUE;
          end
        end
        S_DRAIN: if (ob_words == 0 || (ob_words == 1)) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_IDLE && cfg_valid) |-> (cfg_e <= 16'(MEM_WORDS*32 - 32)))
    else $error("interleaver: E too large for the buffer");

endmodule
