// phy_pkg: types, constants and small functions shared by the 5G NR PHY
// encoding and decoding chains.
//
// LLRs are 8-bit two's-complement numbers in a symmetric fixed-point format
// with two fractional bits (units of 0.25). Only the range [-31, +31], i.e.
// [-7.75, +7.75], is used; the sign is that of log(P(b=1)/P(b=0)).
// Bit streams are packed into 32-bit words, stream bit t in word t/32 at bit
// position t%32 (least significant bit first); this packing is a choice of
// this design.
package phy_pkg;

  localparam int LLR_W      = 8;    // stored LLR width (6-bit value sign-extended)
  localparam int LLR_MAXV   = 31;   // +7.75 in units of 0.25
  localparam int GOLD_NC    = 1600; // gold sequence offset Nc of TS 38.211

  typedef logic signed [LLR_W-1:0] llr_t;

  // Modulation order selector; Qm = 2, 4, 6, 8.
  typedef enum logic [1:0] {
    MOD_QPSK   = 2'd0,
    MOD_16QAM  = 2'd1,
    MOD_64QAM  = 2'd2,
    MOD_256QAM = 2'd3
  } mod_t;

  function automatic int unsigned qm_of(mod_t m);
    return 2 * (int'(m) + 1);
  endfunction

  // Saturate an integer to the symmetric LLR range [-31, 31].
  function automatic llr_t sat_llr(int v);
    if (v > LLR_MAXV)       return llr_t'(LLR_MAXV);
    else if (v < -LLR_MAXV) return llr_t'(-LLR_MAXV);
    else                    return llr_t'(v);
  endfunction

  // LLR estimator constant A_Qm (Table "LLR approximation parameters":
  // 2/sqrt(2), 2/sqrt(10), 2/sqrt(42), 2/sqrt(170)) for symbols in signed
  // Q3.12 format (value * 4096, rounded).
  function automatic int a_const(mod_t m);
    case (m)
      MOD_QPSK:   return 5793;
      MOD_16QAM:  return 2591;
      MOD_64QAM:  return 1264;
      default:    return 628;
    endcase
  endfunction

  // B, C, D as multiples of A (same table); 0 where the table has "--".
  function automatic int b_const(mod_t m);
    case (m)
      MOD_QPSK:   return 0;
      MOD_16QAM:  return a_const(m);
      MOD_64QAM:  return 2 * a_const(m);
      default:    return 4 * a_const(m);
    endcase
  endfunction

  function automatic int c_const(mod_t m);
    case (m)
      MOD_64QAM:  return a_const(m);
      MOD_256QAM: return 2 * a_const(m);
      default:    return 0;
    endcase
  endfunction

  function automatic int d_const(mod_t m);
    return (m == MOD_256QAM) ? a_const(m) : 0;
  endfunction

  // G = E / Qm, the number of modulation symbols of a code block.
  function automatic logic [15:0] div_qm(logic [15:0] x, mod_t m);
    case (m)
      MOD_QPSK:  return x >> 1;
      MOD_16QAM: return x >> 2;
      MOD_64QAM: return x / 16'd6;
      default:   return x >> 3;
    endcase
  endfunction

  // Per-code-block configuration of the encoding chain.
  typedef struct packed {
    logic [15:0] ncb;     // circular buffer length in bits
    logic [15:0] e;       // rate-matched length E in bits
    logic [15:0] k0;      // starting position (from the redundancy version)
    mod_t        mod;     // modulation order Qm
    logic [30:0] c_init;  // scrambling sequence initialisation
  } enc_cfg_t;

  // Per-code-block configuration of the decoding chain.
  typedef struct packed {
    mod_t        mod;        // modulation order Qm
    logic [15:0] scale;      // A_Qm / sigma^2, unsigned Q8.8
    logic [30:0] c_init;     // scrambling sequence initialisation
    logic [15:0] e;          // received LLRs E
    logic [3:0]  buf_id;     // HARQ virtual circular buffer
    logic        new_tx;     // 1: new packet, 0: retransmission
    logic [15:0] k0;         // starting position (from the redundancy version)
    logic [15:0] ncb;        // circular buffer length
    logic [15:0] zc2;        // 2*Zc punctured systematic LLRs
    logic [15:0] fill_start; // first filler position in the circular buffer
    logic [15:0] fill_len;   // number of filler bits F
  } dec_cfg_t;

endpackage
