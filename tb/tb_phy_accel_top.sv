// tb_phy_accel_top: end-to-end test of both chains at the default sizes, the
// encoding and decoding chains running at the same time.
//
// Encoding: random codewords go through rate matching, interleaving and
// scrambling; the output is compared with a model built from the
// definitions (bit (k0+t) mod Ncb, row/column interleaving, bit-serial gold
// sequence). Decoding: random equalised symbols go through LLR estimation,
// descrambling, deinterleaving and HARQ rate unmatching; the decoder-side
// output is compared with the LLR equations, the gold sequence and a
// per-buffer HARQ model. The paper's decoding block (Ncb = 26112, E = 12672)
// and the largest encoder buffer (Ncb = 25344) are included.
//
// Mechanisms counted (each must occur): repetition in the rate matcher,
// interleaver waiting for the scrambler start-up, decoder input held off
// during descrambler start-up, a one-symbol beat, deinterleaver readout held
// by rate-unmatcher backpressure, a beat split at the circular-buffer end,
// HARQ combining of a retransmission, a new packet, filler LLRs, punctured
// zero LLRs.
module tb_phy_accel_top;
  import phy_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic enc_cfg_valid = 0, enc_cfg_ready, enc_in_valid = 0, enc_in_ready;
  enc_cfg_t enc_cfg;
  logic [31:0] enc_in_data = '0;
  logic enc_out_valid, enc_out_last;
  logic [31:0] enc_out_data;
  logic [5:0] enc_out_nbits;
  logic dec_cfg_valid = 0, dec_cfg_ready, sym_valid = 0, sym_ready, sym_two = 0;
  dec_cfg_t dec_cfg;
  logic signed [15:0] sym_i [2];
  logic signed [15:0] sym_q [2];
  logic dec_out_valid, dec_out_last;
  llr_t dec_out_llr [16];
  logic [4:0] dec_out_cnt;

  phy_accel_top dut (.*);

  // Mechanism counters.
  int n_repeat = 0, n_scr_wait = 0, n_sym_hold = 0, n_one_sym = 0, n_backpressure = 0;
  int n_split = 0, n_retx = 0, n_new = 0, n_filler = 0, n_punct = 0;
  always @(posedge clk) begin
    if (dut.u_interleaver.state == 3'd2 && !dut.scr_ready) n_scr_wait++;
    if (dut.sym_left != 0 && !dut.ds_ready) n_sym_hold++;
    if (dut.u_deinterleaver.state == 2'd2 && !dut.ru_in_ready) n_backpressure++;
    if (dut.ru_split) n_split++;
    if (sym_valid && sym_ready && !dut.u_llr_estimator.in_two) n_one_sym++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- Encoding chain ----------------
  task automatic enc_run(input int ncb, input int e, input int k0, input mod_t m, input logic [30:0] ci);
    bit cw[], c[];
    bit rm[], il[];
    int qm, g, nw, got;
    qm = int'(qm_of(m)); g = e / qm;
    cw = new[ncb]; rm = new[e]; il = new[e];
    foreach (cw[i]) cw[i] = 1'($urandom);
    for (int t = 0; t < e; t++) rm[t] = cw[(k0 + t) % ncb];
    for (int k = 0; k < g; k++) for (int l = 0; l < qm; l++) il[k*qm + l] = rm[l*g + k];
    gold_ref(ci, e, c);
    if (e > ncb) n_repeat++;
    @(negedge clk);
    while (!enc_cfg_ready) @(negedge clk);
    enc_cfg_valid = 1;
    enc_cfg.ncb = 16'(ncb); enc_cfg.e = 16'(e); enc_cfg.k0 = 16'(k0); enc_cfg.mod = m; enc_cfg.c_init = ci;
    @(negedge clk); enc_cfg_valid = 0;
    nw = (ncb + 31) / 32;
    for (int w = 0; w < nw; w++) begin
      enc_in_valid = 1;
      for (int b = 0; b < 32; b++) enc_in_data[b] = (32*w + b < ncb) ? cw[32*w + b] : 1'b0;
      @(negedge clk);
    end
    enc_in_valid = 0;
    got = 0;
    while (got < e) begin
      @(posedge clk); #1;
      if (enc_out_valid) begin
        int nb;
        nb = (e - got >= 32) ? 32 : e - got;
        checks++;
        if (enc_out_nbits != 6'(nb) || enc_out_last != (got + nb == e)) failures++;
        for (int b = 0; b < nb; b++) begin
          checks++;
          if (enc_out_data[b] !== (il[got + b] ^ c[got + b])) begin
            failures++;
            if (failures < 10) $display("enc ncb %0d e %0d: bit %0d wrong", ncb, e, got + b);
          end
        end
        got += nb;
      end
    end
  endtask

  // ---------------- Decoding chain ----------------
  int hq [16][];

  // Expected decoder-side output of each issued block, in order.
  typedef int exp_arr_t[$];
  exp_arr_t exp_q[$];
  time      issue_t[$];
  int       dec_issued = 0, dec_checked = 0;

  task automatic dec_run(input mod_t m, input int e, input int b, input bit newp, input int ncb,
                         input int k0, input int zc2, input int fst, input int flen,
                         input logic [30:0] ci, input int scale);
    int qm, g, k;
    int si[], sq[];
    int llr[], dsc[], dil[];
    bit c[];
    exp_arr_t exp;
    qm = int'(qm_of(m)); g = e / qm;
    si = new[g]; sq = new[g]; llr = new[e]; dsc = new[e]; dil = new[e];
    foreach (si[i]) begin
      si[i] = $signed($urandom_range(0, 2*9000)) - 9000;
      sq[i] = $signed($urandom_range(0, 2*9000)) - 9000;
    end
    for (int s = 0; s < g; s++) for (int j = 0; j < qm; j++) llr[s*qm + j] = llr_ref(m, si[s], sq[s], scale, j);
    gold_ref(ci, e, c);
    for (int n = 0; n < e; n++) dsc[n] = c[n] ? -llr[n] : llr[n];
    for (int kk = 0; kk < g; kk++) for (int l = 0; l < qm; l++) dil[l*g + kk] = dsc[kk*qm + l];
    if (newp) begin
      hq[b] = new[ncb];
      foreach (hq[b][i]) hq[b][i] = 0;
      n_new++;
    end else n_retx++;
    for (int n = 0; n < e; n++) begin
      int p, v;
      p = (k0 + n) % ncb;
      v = hq[b][p] + dil[n];
      hq[b][p] = (v > 31) ? 31 : (v < -31) ? -31 : v;
    end
    for (int i = 0; i < zc2; i++) exp.push_back(0);
    for (int p = 0; p < ncb; p++) exp.push_back((p >= fst && p < fst + flen) ? -31 : hq[b][p]);
    n_filler += flen; n_punct += zc2;
    @(negedge clk);
    while (!dec_cfg_ready) @(negedge clk);
    dec_cfg_valid = 1;
    dec_cfg.mod = m; dec_cfg.scale = 16'(scale); dec_cfg.c_init = ci; dec_cfg.e = 16'(e);
    dec_cfg.buf_id = 4'(b); dec_cfg.new_tx = newp; dec_cfg.k0 = 16'(k0); dec_cfg.ncb = 16'(ncb);
    dec_cfg.zc2 = 16'(zc2); dec_cfg.fill_start = 16'(fst); dec_cfg.fill_len = 16'(flen);
    exp_q.push_back(exp);
    issue_t.push_back($time);
    dec_issued++;
    @(negedge clk); dec_cfg_valid = 0;
    k = 0;
    while (k < g) begin
      sym_valid = 1; sym_two = (g - k >= 2);
      sym_i[0] = 16'(si[k]); sym_q[0] = 16'(sq[k]);
      sym_i[1] = 16'(sym_two ? si[k+1] : 0); sym_q[1] = 16'(sym_two ? sq[k+1] : 0);
      @(posedge clk);
      if (sym_ready) k += sym_two ? 2 : 1;
      #1;
    end
    sym_valid = 0;
  endtask

  // Checker: compares decoder-side output with the expected blocks in order.
  time last_out_t[$];
  initial begin
    forever begin
      exp_arr_t exp;
      int got;
      wait (exp_q.size() != 0);
      exp = exp_q[0];
      got = 0;
      while (got < exp.size()) begin
        @(posedge clk); #1;
        if (dec_out_valid) begin
          checks++;
          if (dec_out_last != (got + int'(dec_out_cnt) == exp.size())) failures++;
          for (int i = 0; i < int'(dec_out_cnt); i++) begin
            checks++;
            if (int'(dec_out_llr[i]) != exp[got + i]) begin
              failures++;
              if (failures < 10) $display("dec block %0d: LLR %0d got %0d exp %0d", dec_checked, got + i, dec_out_llr[i], exp[got + i]);
            end
          end
          got += int'(dec_out_cnt);
        end
      end
      last_out_t.push_back($time);
      void'(exp_q.pop_front());
      dec_checked++;
    end
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
    else $display("%-40s %0d", what, n);
  endtask

  initial begin
    enc_cfg = '0; dec_cfg = '0;
    sym_i[0] = 0; sym_i[1] = 0; sym_q[0] = 0; sym_q[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        enc_run(197, 1000, 55, MOD_16QAM, 31'h00AB_CDEF);
        enc_run(1000, 606, 333, MOD_64QAM, 31'd12345);
        enc_run(25344, 12672, 6336, MOD_256QAM, 31'h7654_3210);
      end
      begin
        dec_run(MOD_QPSK,   400, 2, 1, 600, 100, 16, 50, 10, 31'h1111, 700);
        dec_run(MOD_16QAM, 1000, 2, 0, 600, 300, 16, 50, 10, 31'h2222, 900);
        dec_run(MOD_64QAM,  606, 7, 1, 500, 0,   10, 0, 0,   31'h3333, 1500);
        dec_run(MOD_256QAM, 800, 9, 1, 50, 7,    4,  0, 0,   31'h4444, 3000);
        // The paper's throughput block (K = 8448, Ncb = 26112, G = 12672):
        // new transmission and retransmission, then back-to-back blocks.
        dec_run(MOD_QPSK, 12672, 15, 1, 26112, 6528, 768, 8000, 200, 31'h5555, 600);
        dec_run(MOD_QPSK, 12672, 15, 0, 26112, 13056, 768, 8000, 200, 31'h5556, 600);
        for (int j = 0; j < 4; j++)
          dec_run(MOD_256QAM, 12672, 10 + j, 1, 26112, 0, 768, 0, 0, 31'(32'h6000 + j), 2500);
        wait (dec_checked == dec_issued);
      end
    join
    need("rate-matcher repetition (E > Ncb)", n_repeat);
    need("interleaver waiting for scrambler", n_scr_wait);
    need("symbols held during descrambler start", n_sym_hold);
    need("one-symbol beat", n_one_sym);
    need("deinterleaver held by backpressure", n_backpressure);
    need("beat split at circular-buffer end", n_split);
    need("HARQ retransmission combined", n_retx);
    need("new packet in a fresh buffer", n_new);
    need("filler LLRs forced to -7.75", n_filler);
    need("punctured LLRs set to 0", n_punct);
    // Steady-state rate of the back-to-back 256QAM blocks (the last three).
    begin
      int per;
      per = int'((last_out_t[dec_checked-1] - last_out_t[dec_checked-4]) / 4 / 3);
      $display("256QAM, E = 12672, K = 8448: %0d clocks per block, %0d Mbit/s at 250 MHz",
               per, 8448 * 250 / per);
      checks++;
      if (per > 3500) begin failures++; $display("blocks do not overlap"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
