// tb_scrambler: checks the 32-bit scrambler against a bit-serial gold
// sequence model for two code blocks, including a partial last word, the
// 50-clock start-up and the one-word-per-clock rate, then random blocks with
// random c_init, random length and, for half of them, idle input clocks.
module tb_scrambler;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic init = 0, in_valid = 0, in_last = 0, in_ready;
  logic [30:0] c_init = '0;
  logic [31:0] in_data = '0;
  logic [5:0]  in_nbits = '0;
  logic out_valid, out_last;
  logic [31:0] out_data;
  logic [5:0]  out_nbits;

  scrambler dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input logic [30:0] ci, input int nbits_total, input bit gaps = 0);
    bit c[];
    logic [31:0] words[$];
    int nw, got, t0, cyc;
    gold_ref(ci, nbits_total, c);
    nw = (nbits_total + 31) / 32;
    for (int w = 0; w < nw; w++) words.push_back($urandom);
    @(negedge clk); init = 1; c_init = ci;
    @(negedge clk); init = 0;
    cyc = 0;
    while (!in_ready) begin @(negedge clk); cyc++; end
    checks++;
    // One clock to load c_init, then 1600/32 = 50 clocks of skipping.
    if (cyc + 1 != 51) begin failures++; $display("start-up took %0d clocks", cyc + 1); end
    fork
      begin
        for (int w = 0; w < nw; w++) begin
          in_valid = 1; in_data = words[w];
          in_nbits = (w == nw - 1) ? 6'(nbits_total - 32*w) : 6'd32;
          in_last  = (w == nw - 1);
          @(negedge clk);
          if (gaps && w != nw - 1) begin
            in_valid = 0;
            repeat ($urandom_range(0, 2)) @(negedge clk);
          end
        end
        in_valid = 0; in_last = 0;
      end
      begin
        got = 0; t0 = -1;
        while (got < nw) begin
          @(posedge clk); #1;
          if (out_valid) begin
            logic [31:0] exp;
            int nb;
            nb = (got == nw - 1) ? nbits_total - 32*got : 32;
            exp = '0;
            for (int i = 0; i < nb; i++) exp[i] = words[got][i] ^ c[32*got + i];
            checks++;
            if (out_data !== exp || out_nbits != 6'(nb) || out_last != (got == nw - 1)) begin
              failures++;
              $display("word %0d: got %h exp %h", got, out_data, exp);
            end
            if (t0 < 0) t0 = $time;
            got++;
          end
        end
        checks++;
        if (!gaps && ($time - t0) / 4 != nw - 1) begin failures++; $display("not one word per clock"); end
      end
    join
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_block(31'h1234_5678 & 31'h7fff_ffff, 32*20 + 13);
    run_block(31'd1000 * 32768 + 31'd21, 32*7);
    for (int n = 0; n < 40; n++)
      run_block(31'($urandom), $urandom_range(1, 3000), n[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
