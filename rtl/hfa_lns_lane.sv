// hfa_lns_lane -- one element of the log-domain sum of two products.
//
// Computes, for one vector element, c = a*2^qa + b*2^qb with a, b and c held
// in LNS form (sign, log2 of magnitude in 9.7):
//   A = lg_a + qa,  B = lg_b + qb
//   lg_y = max(A,B) + 2^-|A-B|   if the signs agree
//   lg_y = max(A,B) - 2^-|A-B|   otherwise
//   s_y  = s_a if A > B, else s_b
// The log2(1 +/- 2^-|A-B|) term is replaced by +/- 2^-|A-B| (Mitchell), and
// 2^-|A-B| comes from hfa_pow2_pwl.  This is the paper's structure.  Every
// fixed-point addition saturates to the 9.7 range, so the zero code -256.0
// stays at the bottom of the range (this design's choice).  Combinational.
// Bit 16 of the 17-bit difference |A-B| is not read: the subtraction is
// ordered by A > B, so the difference is never negative and fits in 16 bits.
module hfa_lns_lane
  import hfa_pkg::*;
(
  input  lns_t lg_a,
  input  logic s_a,
  input  lns_t lg_b,
  input  logic s_b,
  input  lns_t qa,
  input  lns_t qb,
  output lns_t lg_y,
  output logic s_y
);
  lns_t        A, B, mx;
  logic        a_gt_b;
  logic [LNS_W-1:0] dabs;
  logic [7:0]  pw;
  logic signed [LNS_W:0] diff;

  always_comb begin
    A      = lns_sat(18'(lg_a) + 18'(qa));
    B      = lns_sat(18'(lg_b) + 18'(qb));
    a_gt_b = (A > B);
    mx     = a_gt_b ? A : B;
    diff   = a_gt_b ? (17'(A) - 17'(B)) : (17'(B) - 17'(A));
    dabs   = diff[LNS_W-1:0];                 // diff < 512: bit 16 is always 0
  end

  hfa_pow2_pwl u_pow2 (.x(dabs), .y(pw));

  always_comb begin
    if (s_a == s_b) lg_y = lns_sat(18'(mx) + 18'($signed({1'b0, pw})));
    else            lg_y = lns_sat(18'(mx) - 18'($signed({1'b0, pw})));
    s_y = a_gt_b ? s_a : s_b;
  end
endmodule
