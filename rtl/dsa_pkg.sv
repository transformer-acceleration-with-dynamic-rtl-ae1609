// dsa_pkg: shared constants, types and arithmetic helpers of the dynamic
// sparse attention (DSA) accelerator.
//
// Number formats used throughout:
//   * high-precision data (X, weights, Q, K, V, scores, Z): 16-bit signed
//     fixed point with FRAC = 8 fraction bits (the "FX16" format the text
//     names as an example of high precision);
//   * prediction data (quantised XP, W~_Q, W~_K, Q~, K~): LP_BITS-bit signed
//     integers, INT4 by default (the precision the evaluation settles on);
//   * attention probabilities: unsigned Q0.15 (32768 = 1.0).
// The choice of FX16/Q8.8 and of truncating (floor) right shifts for every
// requantisation is this design's own; the paper fixes only "high" versus
// "low" precision.
package dsa_pkg;

  localparam int FX_W      = 16;  // high-precision word
  localparam int FRAC      = 8;   // fraction bits of the high-precision word
  localparam int PROB_FRAC = 15;  // fraction bits of a probability / exp value

  // Host write targets.
  typedef enum logic [2:0] {
    MEM_X   = 3'd0,  // input sequence X        (row = token, col = feature)
    MEM_WQ  = 3'd1,  // W_Q                     (row = feature, col = head dim)
    MEM_WK  = 3'd2,  // W_K
    MEM_WV  = 3'd3,  // W_V
    MEM_P   = 3'd4,  // ternary projection P    (row = feature, col = k)
    MEM_WQT = 3'd5,  // W~_Q                    (row = k, col = k)
    MEM_WKT = 3'd6   // W~_K
  } mem_sel_e;

  // Ternary code of one entry of the random projection P.
  typedef enum logic [1:0] {
    TERN_ZERO = 2'b00,
    TERN_POS  = 2'b01,
    TERN_NEG  = 2'b11
  } tern_e;

  // Arithmetic right shift followed by saturation to a signed `bits`-bit range.
  function automatic longint sat_shift(input longint v, input int shift, input int bits);
    longint s, hi, lo;
    s  = v >>> shift;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -hi - 1;
    if (s > hi) return hi;
    if (s < lo) return lo;
    return s;
  endfunction

endpackage
