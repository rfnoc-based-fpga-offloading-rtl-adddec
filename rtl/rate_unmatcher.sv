// rate_unmatcher: HARQ-compliant rate unmatching with soft combining.
//
// Received LLRs are put back at their circular-buffer positions
// (k0 + n) mod Ncb, k0 being set by the redundancy version. The buffer memory
// holds NBUF = 16 virtual circular buffers of ROWS = 1652 128-bit rows (16 x
// 1652 vectors, six URAMs in the paper); the host picks the buffer per code
// block: a free one for a new packet, the packet's earlier one for a
// retransmission. LLRs of a retransmission are added to the stored ones
// (saturated to +-7.75), which lowers the effective code rate. When the block
// is complete the whole codeword is read out for the LDPC decoder: first the
// 2*Zc punctured systematic LLRs as 0, then the Ncb buffer positions, with
// the F filler positions forced to -7.75 and positions never received set to
// 0. All of this follows the paper.
//
// Choices of this design: the memory is 16 banks of 8-bit LLRs, bank b
// holding positions p with p mod 16 = b, so a beat of up to 16 consecutive
// positions needs one access per bank at any alignment. A beat that would
// cross the end of the buffer (position Ncb-1 -> 0) is split over two clocks.
// Each write is a read-modify-write through a two-clock read (registered
// memory output); a position is not revisited within three clocks as long as
// Ncb >= 48. For a new packet the first Ncb LLRs overwrite and later ones
// (repetition when E > Ncb) are added; the positions not received are
// cleared to 0 in memory during readout so that a retransmission adds to
// zeros. Input beats pass through an 8-deep FIFO; 'in_ready' is an
// almost-full level allowing two beats in flight.
//
// Interface: 'cfg_valid' with the block parameters when 'cfg_ready'; then E
// LLRs in beats ('in_cnt' valid lanes from lane 0). Output: beats of
// 'out_cnt' LLRs, 'out_last' on the final one, 2*Zc + Ncb LLRs in all, no
// backpressure.
module rate_unmatcher
  import phy_pkg::*;
#(
  parameter int NBUF = 16,
  parameter int ROWS = 1652
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  logic [$clog2(NBUF)-1:0] cfg_buf,
  input  logic        cfg_new,
  input  logic [15:0] cfg_e,
  input  logic [15:0] cfg_k0,
  input  logic [15:0] cfg_ncb,
  input  logic [15:0] cfg_zc2,
  input  logic [15:0] cfg_fill_start,
  input  logic [15:0] cfg_fill_len,
  input  logic        in_valid,
  output logic        in_ready,
  input  llr_t        in_llr [16],
  input  logic [4:0]  in_cnt,
  output logic        out_valid,
  output llr_t        out_llr [16],
  output logic [4:0]  out_cnt,
  output logic        out_last,
  output logic        split_stall   // a beat was split at the buffer end
);
  localparam int DEPTH = NBUF * ROWS;
  localparam int AW    = $clog2(DEPTH);
  localparam int FD    = 8;

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_WDRAIN, S_ZEROS, S_READ, S_RDRAIN} state_t;
  state_t state;


  // Block parameters.
  logic        newtx;
  logic [15:0] e, k0, ncb, zc2, fst, flen;
  logic [AW-1:0] base;

  // Input FIFO.
  llr_t       f_llr [FD][16];
  logic [4:0] f_cnt [FD];
  logic [2:0] f_wp, f_rp;
  logic [3:0] f_n;
  logic       f_pop;

  // Write engine.
  logic [15:0] pos, written;
  logic [4:0]  used;       // LLRs of the head beat already placed
  logic [4:0]  n_take;
  logic [3:0]  off;
  logic        w_go;

  // Read engine.
  logic [15:0] zleft, rrow, nrows;

  // Pipeline: s1 = address registered with memory read, s2 = registered output.
  logic        s1_w, s2_w, s1_r, s2_r;
  logic [15:0] s1_mask, s2_mask;
  logic [AW-1:0] s1_addr [16];
  logic [AW-1:0] s2_addr [16];
  llr_t        s1_dat [16];
  llr_t        s2_dat [16];
  logic [15:0] s1_add, s2_add;
  logic [15:0] s1_row, s2_row;
  logic        s1_last, s2_last;
  llr_t        rd1 [16];
  llr_t        rd2 [16];

  logic [AW-1:0] a0 [16];
  logic [15:0]   m0, add0;
  llr_t          d0 [16];
  logic          r_go;

  function automatic logic [15:0] min16(logic [15:0] a, logic [15:0] b);
    return (a < b) ? a : b;
  endfunction

  assign cfg_ready = (state == S_IDLE);
  assign in_ready  = (f_n <= 4'(FD - 3));
  assign off       = pos[3:0];

  // Write-side placement of the head beat.
  always_comb begin
    logic [15:0] avail;
    avail  = 16'(f_cnt[f_rp]) - 16'(used);
    n_take = 5'(min16(avail, ncb - pos));
    w_go   = (state == S_WRITE) && (f_n != 0);
    r_go   = (state == S_READ);
    f_pop  = w_go && (used + n_take == f_cnt[f_rp]);
    m0 = '0; add0 = '0;
    for (int b = 0; b < 16; b++) begin
      logic [3:0] i;
      i = 4'(b) - off;
      if (r_go) begin
        a0[b] = base + AW'(rrow);
        d0[b] = '0;
      end else begin
        a0[b] = base + AW'(pos >> 4) + ((4'(b) < off) ? AW'(1) : AW'(0));
        d0[b] = f_llr[f_rp][4'(5'(used) + 5'(i))];
        if (w_go && 5'(i) < n_take) begin
          m0[b]   = 1'b1;
          add0[b] = !newtx || (written + 16'(i) >= ncb);
        end
      end
    end
  end

  // Readout value of lane b for the row in stage 2.
  function automatic llr_t rd_value(logic [15:0] p, llr_t stored);
    logic [15:0] d;
    logic        got;
    d   = (p >= k0) ? p - k0 : p + ncb - k0;
    got = (e >= ncb) || (d < e);
    if (p >= fst && p < fst + flen) return llr_t'(-LLR_MAXV);
    else if (newtx && !got)         return '0;
    else                            return stored;
  endfunction

  // Banked memory: one read and one write per bank per clock.
  logic [AW-1:0] mem_waddr [16];
  llr_t          mem_wdata [16];
  logic [15:0]   mem_we;

  always_comb begin
    for (int b = 0; b < 16; b++) begin
      mem_we[b]    = (s2_w || s2_r) && s2_mask[b];
      mem_waddr[b] = s2_addr[b];
      mem_wdata[b] = (s2_w && s2_add[b]) ? sat_llr(int'(rd2[b]) + int'(s2_dat[b]))
                   : (s2_w ? s2_dat[b] : llr_t'(0));
    end
  end

  for (genvar b = 0; b < 16; b++) begin : g_bank
    bram #(.DW(LLR_W), .DEPTH(DEPTH)) u_bank (
      .clk,
      .we(mem_we[b]), .waddr(mem_waddr[b]), .wdata(mem_wdata[b]),
      .raddr_a(a0[b]), .rdata_a(rd1[b]),
      .raddr_b('0), .rdata_b()
    );
  end

  always_ff @(posedge clk) rd2 <= rd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      newtx <= 1'b0; e <= '0; k0 <= '0; ncb <= '0; zc2 <= '0; fst <= '0; flen <= '0;
      base <= '0;
      f_wp <= '0; f_rp <= '0; f_n <= '0;
      for (int j = 0; j < FD; j++) begin
        f_cnt[j] <= '0;
        for (int b = 0; b < 16; b++) f_llr[j][b] <= '0;
      end
      pos <= '0; written <= '0; used <= '0;
      zleft <= '0; rrow <= '0; nrows <= '0;
      s1_w <= 1'b0; s2_w <= 1'b0; s1_r <= 1'b0; s2_r <= 1'b0;
      s1_mask <= '0; s2_mask <= '0; s1_add <= '0; s2_add <= '0;
      s1_row <= '0; s2_row <= '0; s1_last <= 1'b0; s2_last <= 1'b0;
      for (int b = 0; b < 16; b++) begin
        s1_addr[b] <= '0; s2_addr[b] <= '0; s1_dat[b] <= '0; s2_dat[b] <= '0;
        out_llr[b] <= '0;
      end
      out_valid <= 1'b0; out_cnt <= '0; out_last <= 1'b0; split_stall <= 1'b0;
    end else begin
      // FIFO push / pop.
      if (in_valid) begin
        f_llr[f_wp] <= in_llr;
        f_cnt[f_wp] <= in_cnt;
        f_wp <= f_wp + 1'b1;
      end
      if (f_pop) f_rp <= f_rp + 1'b1;
      f_n <= f_n + (in_valid ? 4'd1 : 4'd0) - (f_pop ? 4'd1 : 4'd0);

      // Pipeline registers.
      s1_w <= w_go; s1_r <= r_go;
      s1_mask <= m0; s1_add <= add0; s1_row <= rrow;
      s1_last <= r_go && (rrow == nrows - 1);
      s1_addr <= a0; s1_dat <= d0;
      s2_w <= s1_w; s2_mask <= s1_mask; s2_add <= s1_add; s2_addr <= s1_addr;
      s2_dat <= s1_dat; s2_row <= s1_row; s2_last <= s1_last;
      s2_r <= 1'b0;
      split_stall <= 1'b0;

      out_valid <= 1'b0;
      out_last  <= 1'b0;

      // Readout output (stage 3) and clearing of positions not received.
      if (s1_r) begin
        s2_r <= 1'b1;
        for (int b = 0; b < 16; b++) begin
          logic [15:0] p;
          p = (s1_row << 4) + 16'(b);
          s2_mask[b] <= newtx && p < ncb &&
                        !((e >= ncb) || (((p >= k0) ? p - k0 : p + ncb - k0) < e));
        end
      end
      if (s2_r) begin
        out_valid <= 1'b1;
        out_cnt   <= 5'(min16(16'd16, ncb - (s2_row << 4)));
        out_last  <= s2_last;
        for (int b = 0; b < 16; b++)
          out_llr[b] <= rd_value((s2_row << 4) + 16'(b), rd2[b]);
      end

      case (state)
        S_IDLE: if (cfg_valid) begin
          newtx <= cfg_new; e <= cfg_e; k0 <= cfg_k0; ncb <= cfg_ncb;
          zc2 <= cfg_zc2; fst <= cfg_fill_start; flen <= cfg_fill_len;
          base <= AW'(cfg_buf) * AW'(ROWS);
          pos <= cfg_k0; written <= '0; used <= '0;
          state <= S_WRITE;
        end
        S_WRITE: if (w_go) begin
          used    <= f_pop ? 5'd0 : used + n_take;
          pos     <= (16'(n_take) == ncb - pos) ? 16'd0 : pos + 16'(n_take);
          written <= written + 16'(n_take);
          split_stall <= !f_pop;
          if (written + 16'(n_take) >= e) state <= S_WDRAIN;
        end
        S_WDRAIN: if (!s1_w && !s2_w) begin
          zleft <= zc2;
          rrow  <= '0;
          nrows <= (ncb + 16'd15) >> 4;
          state <= S_ZEROS;
        end
        S_ZEROS: begin
          if (zleft != 0) begin
            out_valid <= 1'b1;
            out_cnt   <= 5'(min16(16'd16, zleft));
            for (int b = 0; b < 16; b++) out_llr[b] <= '0;
            zleft <= zleft - min16(16'd16, zleft);
          end else begin
            state <= S_READ;
          end
        end
        S_READ: begin
          rrow <= rrow + 1'b1;
          if (rrow == nrows - 1) state <= S_RDRAIN;
        end
        S_RDRAIN: if (!s1_r && !s2_r) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_IDLE && cfg_valid) |->
                   (cfg_ncb >= 16'd48 && cfg_ncb <= 16'(16*ROWS) && cfg_k0 < cfg_ncb && cfg_e != 0))
    else $error("rate_unmatcher: Ncb, k0 or E out of range");
  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && f_n == 4'(FD)))
    else $error("rate_unmatcher: input FIFO overflow");

endmodule
