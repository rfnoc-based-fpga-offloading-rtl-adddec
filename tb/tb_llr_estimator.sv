// tb_llr_estimator: random and boundary symbols for QPSK, 16QAM, 64QAM and
// 256QAM, compared with the piecewise-linear LLR equations evaluated in the
// testbench; checks the 13-clock latency, two symbols per clock, lane
// packing and the one-symbol beat.
module tb_llr_estimator;
  import phy_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  mod_t mod = MOD_QPSK;
  logic [15:0] scale = '0;
  logic in_valid = 0, in_two = 0;
  logic signed [15:0] in_i [2];
  logic signed [15:0] in_q [2];
  logic out_valid;
  llr_t out_llr [16];
  logic [4:0] out_cnt;

  llr_estimator dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int i0, q0, i1, q1; bit two; int t; } beat_t;
  beat_t sent[$];
  int ncyc = 0;
  always @(posedge clk) ncyc++;

  // Monitor: compares every output beat with the model.
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      beat_t s;
      int qm;
      qm = int'(qm_of(mod));
      s = sent.pop_front();
      checks++;
      if (ncyc - s.t != 13) begin failures++; $display("latency %0d", ncyc - s.t); end
      checks++;
      if (out_cnt != 5'((s.two ? 2 : 1) * qm)) failures++;
      for (int b = 0; b < qm; b++) begin
        checks++;
        if (int'(out_llr[b]) != llr_ref(mod, s.i0, s.q0, int'(scale), b)) begin
          failures++;
          $display("mod %0d sym0 b%0d got %0d exp %0d (i=%0d q=%0d)", mod, b, out_llr[b],
                   llr_ref(mod, s.i0, s.q0, int'(scale), b), s.i0, s.q0);
        end
        if (s.two) begin
          checks++;
          if (int'(out_llr[qm + b]) != llr_ref(mod, s.i1, s.q1, int'(scale), b)) begin
            failures++;
            $display("mod %0d sym1 b%0d got %0d exp %0d", mod, b, out_llr[qm + b],
                     llr_ref(mod, s.i1, s.q1, int'(scale), b));
          end
        end
      end
    end
  end

  task automatic send(int i0, int q0, int i1, int q1, bit two);
    beat_t s;
    in_valid = 1; in_two = two;
    in_i[0] = 16'(i0); in_q[0] = 16'(q0); in_i[1] = 16'(i1); in_q[1] = 16'(q1);
    @(posedge clk);
    s.i0 = i0; s.q0 = q0; s.i1 = i1; s.q1 = q1; s.two = two; s.t = ncyc;
    sent.push_back(s);
    #1 in_valid = 0;
  endtask

  function automatic int rnd_sym();
    return $signed($urandom_range(0, 2*12000)) - 12000;
  endfunction

  initial begin
    in_i[0] = 0; in_i[1] = 0; in_q[0] = 0; in_q[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      mod = mod_t'(m);
      scale = 16'(256 + $urandom_range(0, 2000));  // A/sigma^2 between 1 and ~8.8
      @(negedge clk);
      // Saturation corners and exact decision boundaries.
      send(32767, -32767, 0, 0, 1);
      send(b_const(mod), -b_const(mod), b_const(mod) + c_const(mod), 1, 1);
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        send(rnd_sym(), rnd_sym(), rnd_sym(), rnd_sym(), n != 199);
      end
      repeat (20) @(negedge clk);
    end
    // Hand-computed: QPSK, rI = +0.5 (2048), scale 4.0 (1024):
    // b0 = -0.5*4 = -2.0 -> -8 quarter units.
    mod = MOD_QPSK; scale = 16'd1024;
    @(negedge clk);
    send(2048, -2048, 0, 0, 0);
    repeat (14) @(negedge clk);
    checks++;
    if (out_llr[0] != -8 || out_llr[1] != 8) begin
      failures++; $display("hand-computed QPSK case: %0d %0d", out_llr[0], out_llr[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
