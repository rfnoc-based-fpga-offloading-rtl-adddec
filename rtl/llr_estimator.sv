// llr_estimator: soft demapper for gray-mapped QPSK, 16QAM, 64QAM and 256QAM.
//
// For each symbol r = rI + j*rQ the max-log LLRs are approximated by nested
// absolute values (paper Eqs. 3-10):
//   b0 = -rI*S, b1 = -rQ*S, b2 = (|rI|-B)*S, b3 = (|rQ|-B)*S,
//   b4 = (||rI|-B|-C)*S, b5 = likewise for rQ, b6 = (|||rI|-B|-C|-D)*S, b7 ...
// with S = A_Qm/sigma^2 and B, C, D multiples of A_Qm (Table I). Per symbol
// there are six 16-bit adders (the -B, -C, -D terms for I and Q) and eight
// multipliers (one per bit). Two symbols are processed per clock in a
// 13-stage pipeline; intermediate values saturate to 16 bits, the product is
// rounded to units of 0.25, saturated to 6 bits (+-31 = +-7.75) and sign-
// extended to 8 bits. These facts are the paper's.
//
// This design's choices: symbols are signed Q3.12 (unit-energy constellation
// times 4096); 'scale' = A_Qm/sigma^2 is supplied by the host as unsigned Q8.8
// (the paper does not say where sigma^2 enters); the product is Q.20 and is
// shifted right by 18 with round-half-up. Output lanes: symbol 0 bits
// b0..b(Qm-1) in lanes 0..Qm-1, symbol 1 in lanes Qm..2Qm-1; 'out_cnt' = Qm per
// valid symbol. 'in_two' marks that the second symbol is valid (an odd number
// of symbols per code block). Latency is exactly LATENCY clocks, one beat per
// clock, no backpressure.
module llr_estimator
  import phy_pkg::*;
#(
  parameter int LATENCY = 13,
  parameter int SYMS    = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mod_t               mod,
  input  logic [15:0]        scale,
  input  logic               in_valid,
  input  logic               in_two,
  input  logic signed [15:0] in_i [SYMS],
  input  logic signed [15:0] in_q [SYMS],
  output logic               out_valid,
  output llr_t               out_llr [16],
  output logic [4:0]         out_cnt
);
  // Pipeline: 1 input reg, 6 distance stages, 1 select, 1 multiply,
  // 1 round, 1 saturate, 1 pack, 1 output register = 13.
  localparam int NST = 13;

  typedef logic signed [15:0] s16_t;

  function automatic s16_t sat16(int v);
    if (v > 32767)       return s16_t'(32767);
    else if (v < -32767) return s16_t'(-32767);
    else                 return s16_t'(v);
  endfunction

  function automatic s16_t abs16(s16_t v);
    return (v < 0) ? sat16(-int'(v)) : v;
  endfunction

  // Per-symbol, per-component (I=0, Q=1) intermediate values.
  s16_t s_neg [NST][SYMS][2];   // -r
  s16_t s_abs [NST][SYMS][2];   // |r|
  s16_t s_t1  [NST][SYMS][2];   // |r| - B
  s16_t s_t1a [NST][SYMS][2];   // ||r| - B|
  s16_t s_t2  [NST][SYMS][2];   // ||r| - B| - C
  s16_t s_t2a [NST][SYMS][2];
  s16_t s_t3  [NST][SYMS][2];   // ... - D
  s16_t s_d   [NST][SYMS][8];   // selected distances per bit
  logic signed [31:0] s_p   [NST][SYMS][8];
  logic signed [15:0] s_r   [NST][SYMS][8];
  llr_t               s_l   [NST][SYMS][8];
  logic        v    [NST];
  logic [1:0]  nsym [NST];
  mod_t        md   [NST];
  logic [15:0] sc   [NST];
  llr_t        pk   [NST][16];

  s16_t cb, cc, cd;
  always_comb begin
    cb = s16_t'(b_const(mod));
    cc = s16_t'(c_const(mod));
    cd = s16_t'(d_const(mod));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NST; s++) begin
        v[s] <= 1'b0; nsym[s] <= '0; md[s] <= MOD_QPSK; sc[s] <= '0;
        for (int k = 0; k < 16; k++) pk[s][k] <= '0;
        for (int y = 0; y < SYMS; y++) begin
          for (int c = 0; c < 2; c++) begin
            s_neg[s][y][c] <= '0; s_abs[s][y][c] <= '0; s_t1[s][y][c] <= '0;
            s_t1a[s][y][c] <= '0; s_t2[s][y][c] <= '0; s_t2a[s][y][c] <= '0;
            s_t3[s][y][c] <= '0;
          end
          for (int b = 0; b < 8; b++) begin
            s_d[s][y][b] <= '0; s_p[s][y][b] <= '0; s_r[s][y][b] <= '0; s_l[s][y][b] <= '0;
          end
        end
      end
    end else begin
      // Control pipeline. Constants B/C/D are taken from 'mod', which the host
      // holds stable for a whole code block.
      v[0]    <= in_valid;
      nsym[0] <= in_two ? 2'd2 : 2'd1;
      md[0]   <= mod;
      sc[0]   <= scale;
      for (int s = 1; s < NST; s++) begin
        v[s] <= v[s-1]; nsym[s] <= nsym[s-1]; md[s] <= md[s-1]; sc[s] <= sc[s-1];
      end
      for (int y = 0; y < SYMS; y++) begin
        // Stage 0: input register.
        s_abs[0][y][0] <= in_i[y];
        s_abs[0][y][1] <= in_q[y];
        for (int c = 0; c < 2; c++) begin
          // Stage 1: negation and absolute value.
          s_neg[1][y][c] <= sat16(-int'(s_abs[0][y][c]));
          s_abs[1][y][c] <= abs16(s_abs[0][y][c]);
          // Stage 2: |r| - B.
          s_neg[2][y][c] <= s_neg[1][y][c];
          s_t1[2][y][c]  <= sat16(int'(s_abs[1][y][c]) - int'(cb));
          // Stage 3: absolute value.
          s_neg[3][y][c] <= s_neg[2][y][c];
          s_t1[3][y][c]  <= s_t1[2][y][c];
          s_t1a[3][y][c] <= abs16(s_t1[2][y][c]);
          // Stage 4: - C.
          s_neg[4][y][c] <= s_neg[3][y][c];
          s_t1[4][y][c]  <= s_t1[3][y][c];
          s_t2[4][y][c]  <= sat16(int'(s_t1a[3][y][c]) - int'(cc));
          // Stage 5: absolute value.
          s_neg[5][y][c] <= s_neg[4][y][c];
          s_t1[5][y][c]  <= s_t1[4][y][c];
          s_t2[5][y][c]  <= s_t2[4][y][c];
          s_t2a[5][y][c] <= abs16(s_t2[4][y][c]);
          // Stage 6: - D.
          s_neg[6][y][c] <= s_neg[5][y][c];
          s_t1[6][y][c]  <= s_t1[5][y][c];
          s_t2[6][y][c]  <= s_t2[5][y][c];
          s_t3[6][y][c]  <= sat16(int'(s_t2a[5][y][c]) - int'(cd));
        end
        // Stage 7: distance per bit, b(2m) from I, b(2m+1) from Q.
        for (int c = 0; c < 2; c++) begin
          s_d[7][y][0+c] <= s_neg[6][y][c];
          s_d[7][y][2+c] <= s_t1[6][y][c];
          s_d[7][y][4+c] <= s_t2[6][y][c];
          s_d[7][y][6+c] <= s_t3[6][y][c];
        end
        for (int b = 0; b < 8; b++) begin
          // Stage 8: multiply by A/sigma^2 (one DSP per bit).
          s_p[8][y][b] <= s_d[7][y][b] * $signed({1'b0, sc[7]});
          // Stage 9: round to units of 0.25 (>> 18), saturate to 16 bits.
          s_r[9][y][b] <= sat16(int'((s_p[8][y][b] + 32'sd131072) >>> 18));
          // Stage 10: saturate to 6 bits, sign-extend to 8.
          s_l[10][y][b] <= sat_llr(int'(s_r[9][y][b]));
        end
      end
      // Stage 11: pack Qm LLRs of each symbol into consecutive lanes.
      for (int k = 0; k < 16; k++) pk[11][k] <= '0;
      for (int y = 0; y < SYMS; y++)
        for (int b = 0; b < 8; b++)
          if (b < int'(qm_of(md[10])) && y*int'(qm_of(md[10])) + b < 16)
            pk[11][y*qm_of(md[10]) + b] <= s_l[10][y][b];
      // Stage 12: output register.
      pk[12] <= pk[11];
    end
  end

  assign out_valid = v[LATENCY-1];
  assign out_llr   = pk[12];
  assign out_cnt   = 5'(int'(nsym[12]) * int'(qm_of(md[12])));

  initial assert (LATENCY == NST && SYMS == 2)
    else $error("llr_estimator: pipeline is built for 13 stages and 2 symbols");

endmodule
