// tb_descrambler: checks LLR sign flipping against a bit-serial gold
// sequence model, with beats of 4, 8, 12 and 16 LLRs (QPSK..256QAM, two
// symbols per beat) and the 100-clock start-up of the 16-bit generator.
module tb_descrambler;
  import phy_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic init = 0, in_valid = 0, in_ready;
  logic [30:0] c_init = '0;
  llr_t in_llr [16];
  logic [4:0] in_cnt = '0;
  logic out_valid;
  llr_t out_llr [16];
  logic [4:0] out_cnt;

  descrambler dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input logic [30:0] ci, input int nbeats);
    bit c[];
    int cnts[$];
    llr_t vals[$];
    int total, cyc, got, pos;
    total = 0;
    for (int j = 0; j < nbeats; j++) begin
      cnts.push_back(4 * (1 + $urandom_range(0, 3)));
      total += cnts[j];
    end
    for (int i = 0; i < 16 * nbeats; i++) vals.push_back(llr_t'($signed($urandom_range(0, 62)) - 31));
    gold_ref(ci, total, c);
    @(negedge clk); init = 1; c_init = ci;
    @(negedge clk); init = 0;
    cyc = 1;
    while (!in_ready) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 101) begin failures++; $display("start-up took %0d clocks", cyc); end
    fork
      begin
        for (int j = 0; j < nbeats; j++) begin
          in_valid = 1; in_cnt = 5'(cnts[j]);
          for (int b = 0; b < 16; b++) in_llr[b] = vals[16*j + b];
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        got = 0; pos = 0;
        while (got < nbeats) begin
          @(posedge clk); #1;
          if (out_valid) begin
            checks++;
            if (out_cnt != 5'(cnts[got])) failures++;
            for (int b = 0; b < cnts[got]; b++) begin
              llr_t exp;
              exp = c[pos + b] ? -vals[16*got + b] : vals[16*got + b];
              checks++;
              if (out_llr[b] !== exp) begin
                failures++;
                $display("beat %0d lane %0d got %0d exp %0d", got, b, out_llr[b], exp);
              end
            end
            pos += cnts[got];
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    for (int b = 0; b < 16; b++) in_llr[b] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_block(31'h0ABC_DEF1, 40);
    run_block(31'd17, 25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
