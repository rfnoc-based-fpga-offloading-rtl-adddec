// tb_interleaver: feeds E random bits for each modulation order and checks
// that output bit k*Qm + l equals input bit l*G + k (G = E/Qm), including G
// not a multiple of 32, the largest block and waiting for 'out_ready'.
module tb_interleaver;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_ready, in_valid = 0, in_last = 0, out_ready = 1;
  logic [15:0] cfg_e = '0;
  mod_t cfg_mod = MOD_QPSK;
  logic [31:0] in_data = '0;
  logic [5:0] in_nbits = '0;
  logic out_valid, out_last;
  logic [31:0] out_data;
  logic [5:0] out_nbits;

  interleaver dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input mod_t m, input int g, input int hold);
    bit x[];
    int qm, e, nw, got, first, last_t;
    qm = int'(qm_of(m)); e = qm * g;
    x = new[e];
    foreach (x[i]) x[i] = 1'($urandom);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_valid = 1; cfg_e = 16'(e); cfg_mod = m; out_ready = (hold == 0);
    @(negedge clk); cfg_valid = 0;
    nw = (e + 31) / 32;
    for (int w = 0; w < nw; w++) begin
      in_valid = 1; in_last = (w == nw - 1);
      in_nbits = (w == nw - 1) ? 6'(e - 32*w) : 6'd32;
      for (int b = 0; b < 32; b++) in_data[b] = (32*w + b < e) ? x[32*w + b] : 1'b0;
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    repeat (hold) begin
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("output while out_ready low"); end
    end
    out_ready = 1;
    got = 0; first = -1;
    while (got < e) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int nb;
        nb = (e - got >= 32) ? 32 : e - got;
        checks++;
        if (out_nbits != 6'(nb) || out_last != (got + nb == e)) begin
          failures++; $display("nbits/last wrong at %0d", got);
        end
        for (int b = 0; b < nb; b++) begin
          int t, k, l;
          t = got + b; k = t / qm; l = t % qm;
          checks++;
          if (out_data[b] !== x[l*g + k]) begin
            failures++;
            if (failures < 10) $display("qm %0d g %0d: out bit %0d wrong", qm, g, t);
          end
        end
        if (first < 0) first = int'($time);
        last_t = int'($time);
        got += nb;
      end
    end
    // Rate: Qm words per block of 32 symbols in at most Qm + 3 clocks.
    checks++;
    if ((last_t - first) / 4 + 1 > ((g + 31) / 32) * (qm + 3)) begin
      failures++; $display("slow: %0d clocks", (last_t - first) / 4 + 1);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MOD_QPSK, 100, 0);
    run(MOD_16QAM, 77, 5);
    run(MOD_64QAM, 333, 0);
    run(MOD_256QAM, 512, 0);
    run(MOD_256QAM, 1021, 3);
    run(MOD_QPSK, 16000, 0);   // E = 32000 bits, near the 1024-word buffer
    run(MOD_64QAM, 2112, 0);   // E = 12672
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
