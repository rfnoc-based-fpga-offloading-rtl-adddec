// tb_ref_pkg: reference models used by the testbenches, written directly
// from the definitions (bit-serial gold sequence of TS 38.211, the piecewise-
// linear LLR equations) and independent of the RTL's structure.
package tb_ref_pkg;
  import phy_pkg::*;

  // Gold sequence bits c(0..len-1) for c_init, computed one bit at a time.
  function automatic void gold_ref(input logic [30:0] c_init, input int len, ref bit c[]);
    bit x1[], x2[];
    int tot;
    tot = 1600 + len + 31;
    x1 = new[tot];
    x2 = new[tot];
    c  = new[len];
    for (int n = 0; n < 31; n++) begin
      x1[n] = (n == 0);
      x2[n] = c_init[n];
    end
    for (int n = 0; n + 31 < tot; n++) begin
      x1[n+31] = x1[n+3] ^ x1[n];
      x2[n+31] = x2[n+3] ^ x2[n+2] ^ x2[n+1] ^ x2[n];
    end
    for (int n = 0; n < len; n++) c[n] = x1[n+1600] ^ x2[n+1600];
  endfunction

  function automatic int sat(int v, int lim);
    return (v > lim) ? lim : ((v < -lim) ? -lim : v);
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // LLR of bit b of symbol (ri, rq), symbols in Q3.12, scale Q8.8, result in
  // units of 0.25 saturated to +-31.
  function automatic int llr_ref(mod_t m, int ri, int rq, int scale, int b);
    int r, d, a, bb, cc, dd;
    real x;
    a  = (m == MOD_QPSK) ? 5793 : (m == MOD_16QAM) ? 2591 : (m == MOD_64QAM) ? 1264 : 628;
    bb = (m == MOD_16QAM) ? a : (m == MOD_64QAM) ? 2*a : (m == MOD_256QAM) ? 4*a : 0;
    cc = (m == MOD_64QAM) ? a : (m == MOD_256QAM) ? 2*a : 0;
    dd = (m == MOD_256QAM) ? a : 0;
    r = (b % 2 == 0) ? ri : rq;
    case (b / 2)
      0: d = -r;
      1: d = iabs(r) - bb;
      2: d = iabs(iabs(r) - bb) - cc;
      default: d = iabs(iabs(iabs(r) - bb) - cc) - dd;
    endcase
    // d * scale / 2^20 in units of 0.25 -> d*scale / 2^18, rounded half up.
    x = $floor((real'(d) * real'(scale)) / 262144.0 + 0.5);
    return sat(int'(x), 31);
  endfunction

endpackage
