// hfa_score_diff -- running-maximum update and log-domain scale factors.
//
// Given two maxima (or a maximum and a new score) m_a, m_b in BF16 it forms
//   m_n = max(m_a, m_b)
//   qa  = quant[(m_a - m_n) * log2 e]      qb = quant[(m_b - m_n) * log2 e]
// Both differences are <= 0.  The subtractions are BF16 (bf16_sub).  quant
// converts the difference to the signed 9.7 fixed-point format, clamping it
// to [-15, 0] as the paper does (e^x is negligible below -15).  The product
// with log2 e is then a constant shift-and-add: log2 e is rounded to the
// 12-fraction-bit constant LOG2E_Q12 = 5909 (1.011100010101b = 1.44263), one
// shifted copy of the operand per set bit, and the sum is shifted back to 7
// fraction bits (toward minus infinity).  The precision of the constant and
// the rounding are this design's choices.  The same unit sits at the west
// side of every FAU and in every ACC.  Combinational.
module hfa_score_diff
  import hfa_pkg::*;
#(
  parameter int unsigned LOG2E_Q12 = 5909
)(
  input  bf16_t m_a,
  input  bf16_t m_b,
  output bf16_t m_n,
  output lns_t  qa,
  output lns_t  qb
);
  // BF16 compare: true when x > y (signed-magnitude, zeros of both signs equal).
  function automatic logic bf16_gt(input bf16_t x, input bf16_t y);
    logic [15:0] kx, ky;
    kx = x[15] ? ~x : (x | 16'h8000);
    ky = y[15] ? ~y : (y | 16'h8000);
    if (x[14:0] == 15'd0) kx = 16'h8000;
    if (y[14:0] == 15'd0) ky = 16'h8000;
    return kx > ky;
  endfunction

  // BF16 difference (<= 0) to 9.7 fixed point, clamped to [-15, 0].
  function automatic lns_t quant(input bf16_t x);
    logic [7:0]  e;
    logic [22:0] mag;    // magnitude with 7 fraction bits, wide enough for 2^15
    e = x[14:7];
    if (e == 8'd0)        return '0;
    if (!x[15])           return '0;         // positive never occurs: clamp to 0
    if (e >= 8'd131)      return -16'sd1920; // |x| >= 16
    // |x| = 1.m * 2^(e-127); with 7 fraction bits: {1,m} << (e-127) >> 0
    if (e >= 8'd127) mag = 23'({1'b1, x[6:0]}) << (e - 8'd127);
    else             mag = 23'({1'b1, x[6:0]}) >> (8'd127 - e);
    if (mag > 23'd1920)   return -16'sd1920;
    return -$signed(16'(mag));
  endfunction

  // x * log2 e, x <= 0 in 9.7, result in 9.7 rounded toward minus infinity.
  function automatic lns_t mul_log2e(input lns_t x);
    logic signed [31:0] acc;
    acc = '0;
    for (int b = 0; b < 13; b++)
      if (LOG2E_Q12[b]) acc = acc + (32'(x) <<< b);
    return lns_t'(acc >>> 12);
  endfunction

  bf16_t da, db;

  always_comb m_n = bf16_gt(m_a, m_b) ? m_a : m_b;

  bf16_sub u_sub_a (.a(m_a), .b(m_n), .y(da));
  bf16_sub u_sub_b (.a(m_b), .b(m_n), .y(db));

  always_comb begin
    qa = mul_log2e(quant(da));
    qb = mul_log2e(quant(db));
  end
endmodule
