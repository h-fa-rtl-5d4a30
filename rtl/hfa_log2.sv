// hfa_log2 -- BFloat16 to log-domain (LNS) converter (combinational).
//
// Mitchell's approximation log2(1+M) ~ M makes log2|x| ~ (E - bias) + M.
// The exponent and mantissa fields read together as the fixed-point number
// E.M (8 integer, 7 fraction bits); one more integer bit makes it signed and
// the bias, shifted left by 7, is subtracted.  The result is in the 9.7
// format, the sign of x is passed through.  This follows the paper; that a
// zero input maps to log2 = -127 (i.e. 2^-127, practically zero) is this
// design's reading, the paper does not discuss zeros.
module hfa_log2
  import hfa_pkg::*;
(
  input  bf16_t x,
  output logic  s,
  output lns_t  lg
);
  always_comb begin
    s  = x[15];
    lg = $signed({1'b0, x[14:0]}) - $signed(16'(BF16_BIAS << LNS_FRAC));
  end
endmodule
