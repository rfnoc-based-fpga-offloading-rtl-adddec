// tb_deinterleaver: feeds E LLRs in symbol order (two symbols per beat, an
// odd symbol count ending in a one-symbol beat) and checks the 16-LLR output
// vectors: row l of the code block (LLRs k*Qm + l of the input), 16 per
// vector with a partial last vector per row. 'out_ready' is toggled to check
// that reads stop, and the readout rate with 'out_ready' high is checked.
module tb_deinterleaver;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_ready, in_valid = 0, in_ready, out_ready = 1;
  logic [15:0] cfg_e = '0;
  mod_t cfg_mod = MOD_QPSK;
  llr_t in_llr [16];
  logic [4:0] in_cnt = '0;
  logic out_valid, out_last;
  llr_t out_llr [16];
  logic [4:0] out_cnt;

  deinterleaver dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input mod_t m, input int g, input bit throttle);
    llr_t x[];
    llr_t exp[$];
    int qm, e, got, nvec, cyc;
    qm = int'(qm_of(m)); e = qm * g;
    x = new[e];
    foreach (x[i]) x[i] = llr_t'($signed($urandom_range(0, 62)) - 31);
    for (int l = 0; l < qm; l++) for (int k = 0; k < g; k++) exp.push_back(x[k*qm + l]);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_valid = 1; cfg_e = 16'(e); cfg_mod = m;
    @(negedge clk); cfg_valid = 0;
    for (int k = 0; k < g; k += 2) begin
      int n;
      n = (g - k >= 2) ? 2 : 1;
      in_valid = 1; in_cnt = 5'(n * qm);
      for (int b = 0; b < 16; b++) in_llr[b] = (b < n * qm) ? x[k*qm + b] : llr_t'(0);
      #1;
      checks++;
      if (!in_ready) begin failures++; $display("not ready while loading"); end
      @(negedge clk);
    end
    in_valid = 0;
    got = 0; nvec = 0; cyc = 0;
    while (got < e) begin
      @(posedge clk); #1;
      cyc++;
      if (throttle) out_ready = 1'($urandom);
      if (out_valid) begin
        int row_left, n;
        row_left = g - (got % g);
        n = (row_left >= 16) ? 16 : row_left;
        checks++;
        if (out_cnt != 5'(n) || out_last != (got + n == e)) begin
          failures++; $display("cnt/last wrong at %0d: cnt %0d exp %0d", got, out_cnt, n);
        end
        for (int b = 0; b < n; b++) begin
          checks++;
          if (out_llr[b] !== exp[got + b]) begin
            failures++;
            if (failures < 10) $display("qm %0d g %0d: LLR %0d got %0d exp %0d", qm, g, got + b, out_llr[b], exp[got + b]);
          end
        end
        got += n; nvec++;
      end
    end
    out_ready = 1;
    // Rate: one 128-bit vector per clock after the two-clock read latency.
    if (!throttle) begin
      checks++;
      if (cyc > nvec + 3) begin failures++; $display("slow readout: %0d clocks, %0d vectors", cyc, nvec); end
    end
  endtask

  initial begin
    for (int b = 0; b < 16; b++) in_llr[b] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MOD_QPSK, 40, 0);
    run(MOD_16QAM, 37, 0);
    run(MOD_64QAM, 101, 1);
    run(MOD_256QAM, 64, 0);
    run(MOD_QPSK, 6336, 0);      // E = 12672
    run(MOD_256QAM, 1584, 1);
    run(MOD_QPSK, 12288, 0);     // largest row, 16 * DEPTH
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
