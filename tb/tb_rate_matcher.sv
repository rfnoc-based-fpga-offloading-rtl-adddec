// tb_rate_matcher: loads random codewords and checks that the E output bits
// are bits (k0 + t) mod Ncb, for puncturing (E < Ncb), repetition (E > Ncb,
// several wraps), Ncb not a multiple of 32 and unaligned k0; also checks the
// output rate of one 32-bit word per clock.
module tb_rate_matcher;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_ready, in_valid = 0, in_ready, out_ready = 1;
  logic [15:0] cfg_ncb = '0, cfg_e = '0, cfg_k0 = '0;
  logic [31:0] in_data = '0;
  logic out_valid, out_last;
  logic [31:0] out_data;
  logic [5:0] out_nbits;

  rate_matcher dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int ncb, input int e, input int k0);
    bit cw[];
    int nw, got, first, last_t;
    cw = new[ncb];
    foreach (cw[i]) cw[i] = 1'($urandom);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_valid = 1; cfg_ncb = 16'(ncb); cfg_e = 16'(e); cfg_k0 = 16'(k0);
    @(negedge clk); cfg_valid = 0;
    nw = (ncb + 31) / 32;
    for (int w = 0; w < nw; w++) begin
      in_valid = 1;
      for (int b = 0; b < 32; b++) in_data[b] = (32*w + b < ncb) ? cw[32*w + b] : 1'b0;
      #1;
      if (!in_ready) begin failures++; $display("not ready while loading"); end
      @(negedge clk);
    end
    in_valid = 0;
    got = 0; first = -1;
    while (got < e) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int nb;
        nb = (e - got >= 32) ? 32 : e - got;
        checks++;
        if (out_nbits != 6'(nb) || out_last != (got + nb == e)) begin
          failures++; $display("nbits/last wrong at bit %0d", got);
        end
        for (int b = 0; b < nb; b++) begin
          checks++;
          if (out_data[b] !== cw[(k0 + got + b) % ncb]) begin
            failures++;
            if (failures < 10) $display("ncb %0d e %0d k0 %0d: bit %0d wrong", ncb, e, k0, got + b);
          end
        end
        if (first < 0) first = $time;
        last_t = $time;
        got += nb;
      end
    end
    // Rate: one word per clock, allowing a few clocks for the chunks at k0
    // and at each wrap point.
    checks++;
    if ((last_t - first) / 4 + 1 > (e + 31) / 32 + 2 * (e / ncb + 1) + 2) begin
      failures++;
      $display("slow: %0d clocks for %0d words", (last_t - first) / 4 + 1, (e + 31) / 32);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1000, 700, 0);
    run(1000, 700, 333);
    run(25344, 12672, 6336);     // largest buffer, 66*384
    run(197, 1000, 55);          // repetition, Ncb not a multiple of 32
    run(640, 2000, 0);
    run(24000, 24000, 1231);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
