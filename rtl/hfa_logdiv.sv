// hfa_logdiv -- final normalisation o/l in the log domain and conversion of
// the result back to BFloat16 (combinational).
//
// For each output element j (lane j+1 of the triplet; lane 0 holds l):
//   L    = log2|o_j| - log2|l|            (fixed-point subtraction)
//   sign = s_oj XOR s_l
// L is split into integer part I (floor) and fraction F.  With Mitchell's
// approximation 2^(I+F) ~ 2^I (1+F), so I + bias is the BF16 exponent and
// the 7 fraction bits of F are the mantissa, as in the paper.  This
// design's choices: a lane holding the zero code gives +/-0, an exponent
// below 1 flushes to signed zero and one above 254 saturates to the largest
// finite BF16.
module hfa_logdiv
  import hfa_pkg::*;
#(
  parameter int unsigned D = 64
)(
  input  logic [D:0]    sgn,
  input  lns_t [D:0]    lg,
  output bf16_t [D-1:0] attn
);
  always_comb begin
    for (int j = 0; j < D; j++) begin
      logic signed [LNS_W:0]   L;
      logic signed [LNS_W-6:0] e;      // I + bias, 11 bits
      logic                    s;
      L = $signed(17'(lg[j+1])) - $signed(17'(lg[0]));
      e = 11'(L >>> LNS_FRAC) + 11'sd127;
      s = sgn[j+1] ^ sgn[0];
      if (lg[j+1] == LNS_MIN || e <= 11'sd0) attn[j] = {s, 15'd0};
      else if (e >= 11'sd255)                attn[j] = {s, BF16_POS_MAX[14:0]};
      else                                   attn[j] = {s, e[7:0], L[LNS_FRAC-1:0]};
    end
  end
endmodule
