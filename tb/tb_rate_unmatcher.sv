// tb_rate_unmatcher: HARQ rate unmatching against a behavioural model that
// keeps every virtual buffer as an array of LLRs: a new packet clears its
// buffer, every received LLR is added (saturated to +-31) at (k0 + n) mod Ncb,
// and the output is 2*Zc zeros followed by the buffer with filler positions
// forced to -31. Covers a new packet with E < Ncb, a retransmission with
// E > Ncb (wrap, repetition, split beats), interleaved packets in two
// buffers, reuse of a buffer for a new packet, partial input beats and
// input backpressure, and all 16 buffers holding packets at once with their
// retransmissions arriving in shuffled order; checks the readout rate of one
// vector per clock.
module tb_rate_unmatcher;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_ready, cfg_new = 0, in_valid = 0, in_ready;
  logic [3:0] cfg_buf = '0;
  logic [15:0] cfg_e = '0, cfg_k0 = '0, cfg_ncb = '0, cfg_zc2 = '0, cfg_fill_start = '0, cfg_fill_len = '0;
  llr_t in_llr [16];
  logic [4:0] in_cnt = '0;
  logic out_valid, out_last, split_stall;
  llr_t out_llr [16];
  logic [4:0] out_cnt;

  rate_unmatcher dut (.*);

  int model [16][];
  int splits = 0;
  always @(posedge clk) if (split_stall) splits++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int b, input bit newp, input int ncb, input int e, input int k0,
                     input int zc2, input int fst, input int flen, input bit full_beats);
    llr_t x[];
    int sent, got, cyc, nvec;
    int exp[$];
    x = new[e];
    foreach (x[i]) x[i] = llr_t'($signed($urandom_range(0, 62)) - 31);
    // Model.
    if (newp) begin
      model[b] = new[ncb];
      foreach (model[b][i]) model[b][i] = 0;
    end
    for (int n = 0; n < e; n++) begin
      int p, v;
      p = (k0 + n) % ncb;
      v = model[b][p] + int'(x[n]);
      model[b][p] = (v > 31) ? 31 : (v < -31) ? -31 : v;
    end
    for (int i = 0; i < zc2; i++) exp.push_back(0);
    for (int p = 0; p < ncb; p++) exp.push_back((p >= fst && p < fst + flen) ? -31 : model[b][p]);
    // Configure.
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_valid = 1; cfg_buf = 4'(b); cfg_new = newp; cfg_e = 16'(e); cfg_k0 = 16'(k0);
    cfg_ncb = 16'(ncb); cfg_zc2 = 16'(zc2); cfg_fill_start = 16'(fst); cfg_fill_len = 16'(flen);
    @(negedge clk); cfg_valid = 0;
    // Stream in and collect out concurrently.
    fork
      begin
        sent = 0;
        while (sent < e) begin
          int n;
          n = full_beats ? 16 : $urandom_range(1, 16);
          if (n > e - sent) n = e - sent;
          if (in_ready && $urandom_range(0, 3) != 0) begin
            in_valid = 1; in_cnt = 5'(n);
            for (int i = 0; i < 16; i++) in_llr[i] = (i < n) ? x[sent + i] : llr_t'(0);
            sent += n;
          end else in_valid = 0;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        got = 0; cyc = -1; nvec = 0;
        while (got < exp.size()) begin
          @(posedge clk); #1;
          if (cyc >= 0) cyc++;
          if (out_valid) begin
            int n;
            if (cyc < 0) cyc = 1;
            n = out_cnt;
            checks++;
            if (out_last != (got + n == exp.size())) begin failures++; $display("last wrong at %0d", got); end
            for (int i = 0; i < n; i++) begin
              checks++;
              if (int'(out_llr[i]) != exp[got + i]) begin
                failures++;
                if (failures < 10) $display("buf %0d pos %0d got %0d exp %0d", b, got + i, out_llr[i], exp[got + i]);
              end
            end
            got += n; nvec++;
          end
        end
        checks++;
        if (cyc > nvec + 4) begin failures++; $display("slow readout %0d clocks for %0d vectors", cyc, nvec); end
      end
    join
  endtask

  initial begin
    for (int i = 0; i < 16; i++) in_llr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Small codeword (Zc = 8, BG2-like sizes), new packet, puncturing.
    run(3, 1, 400, 250, 37, 16, 100, 12, 0);
    // Another packet in another buffer.
    run(5, 1, 333, 200, 0, 10, 0, 0, 1);
    // Retransmission of buffer 3 with another k0, repetition over the wrap.
    run(3, 0, 400, 900, 205, 16, 100, 12, 1);
    run(5, 0, 333, 120, 300, 10, 0, 0, 0);
    // Buffer 3 reused for a new packet: old LLRs must be gone.
    run(3, 1, 400, 150, 390, 16, 100, 12, 0);
    // Paper-sized block: Ncb = 26112, E = 12672, in the last buffer.
    run(15, 1, 26112, 12672, 6528, 768, 8000, 200, 1);
    run(15, 0, 26112, 12672, 13056, 768, 8000, 200, 0);
    // All 16 buffers in use at once: 16 new packets, then two rounds of
    // retransmissions in a shuffled buffer order.
    begin
      int ncbs [16];
      int order [16];
      for (int b = 0; b < 16; b++) begin
        ncbs[b] = $urandom_range(48, 700);
        order[b] = b;
        run(b, 1, ncbs[b], $urandom_range(20, 900), $urandom_range(0, ncbs[b] - 1),
            16, 0, 0, b[0]);
      end
      repeat (2) begin
        for (int j = 15; j > 0; j--) begin
          int r, t;
          r = $urandom_range(0, j);
          t = order[j]; order[j] = order[r]; order[r] = t;
        end
        for (int j = 0; j < 16; j++)
          run(order[j], 0, ncbs[order[j]], $urandom_range(20, 900),
              $urandom_range(0, ncbs[order[j]] - 1), 16, 0, 0, j[0]);
      end
    end
    checks++;
    if (splits == 0) begin failures++; $display("no beat split at the buffer end"); end
    $display("split beats: %0d", splits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
