// hfa_pkg -- types and constants shared by the H-FA attention datapath.
//
// Number formats used throughout:
//   * bf16_t : BFloat16 (1 sign, 8 exponent with bias 127, 7 mantissa bits).
//              Queries, keys, values, scores, running maxima and the final
//              attention vector use this format.
//   * lns_t  : base-2 logarithm of a magnitude, signed two's-complement fixed
//              point with 9 integer and 7 fraction bits ("9.7").  The sign of
//              the represented number travels separately as one bit.  The
//              most negative code, -256.0, stands for the value zero.
// The 9.7 format, the BF16 data type and the Mitchell approximations follow
// the paper; the zero code and the saturation rules are this design's choice.
package hfa_pkg;

  localparam int unsigned BF16_W   = 16;
  localparam int unsigned LNS_W    = 16;   // 9 integer + 7 fraction bits
  localparam int unsigned LNS_FRAC = 7;

  typedef logic [BF16_W-1:0]       bf16_t;
  typedef logic signed [LNS_W-1:0] lns_t;

  localparam int unsigned BF16_BIAS = 127;

  // Most negative finite BF16: starting value of every running maximum.
  localparam bf16_t BF16_NEG_MAX = 16'hFF7F;
  // Largest finite BF16 magnitude, used when a result overflows.
  localparam bf16_t BF16_POS_MAX = 16'h7F7F;

  localparam lns_t LNS_MIN  = 16'sh8000;   // -256.0, encodes zero
  localparam lns_t LNS_MAX  = 16'sh7FFF;   // +255.99

  // Saturate a wider signed value into the 9.7 range.
  function automatic lns_t lns_sat(input logic signed [LNS_W+1:0] v);
    if (v > $signed({{2{LNS_MAX[LNS_W-1]}}, LNS_MAX}))      return LNS_MAX;
    else if (v < $signed({{2{LNS_MIN[LNS_W-1]}}, LNS_MIN})) return LNS_MIN;
    else                                                     return lns_t'(v[LNS_W-1:0]);
  endfunction

endpackage
