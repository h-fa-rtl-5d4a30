// bf16_sub -- BFloat16 subtractor y = a - b (combinational).
//
// Used for the two score differences of the running softmax, m_prev - m_new
// and s_i - m_new, which the paper keeps in floating point before they are
// quantised to fixed point.  The paper gives only the operation; the inside
// is a plain single-path floating-point adder:
//   1. flip the sign of b, order the operands by magnitude;
//   2. align the smaller significand with a right shift, folding the bits
//      shifted out into a sticky bit;
//   3. add or subtract the significands, normalise with a leading-zero count;
//   4. round to nearest, ties to even.
// Subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero; an overflow yields infinity.  Inf/NaN inputs are not treated
// specially (the attention datapath never produces them).
module bf16_sub
  import hfa_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);
  localparam int W = 27;  // carry | hidden | 7 mantissa | 18 guard/sticky bits

  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb, ex, ey;
  logic [7:0]  ma, mb, mx, my;     // significands with hidden bit
  logic [7:0]  dexp;
  logic [W-1:0] fx, fy, fy_sh, sum;
  logic        sticky;
  logic [4:0]  lz;
  logic [W-1:0] norm;
  logic signed [9:0] e_norm;
  logic [7:0]  mant_r;
  logic        guard, rest, rnd_up;
  logic [8:0]  mant_inc;
  logic signed [9:0] e_fin;

  always_comb begin
    sa = a[15];
    sb = ~b[15];                    // subtraction: negate b
    ea = a[14:7];
    eb = b[14:7];
    ma = (ea == 8'd0) ? 8'd0 : {1'b1, a[6:0]};
    mb = (eb == 8'd0) ? 8'd0 : {1'b1, b[6:0]};

    // Larger magnitude first.
    if ({ea, a[6:0]} >= {eb, b[6:0]}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end
    if (ex == 8'd0) ex = 8'd1;       // zero operand: any exponent works
    if (ey == 8'd0) ey = ex;
    dexp = ex - ey;

    fx = {1'b0, mx, 18'd0};
    fy = {1'b0, my, 18'd0};
    if (dexp >= 8'(W)) begin
      fy_sh  = '0;
      sticky = (my != 8'd0);
    end else begin
      fy_sh  = fy >> dexp;
      sticky = |(fy & ((W'(1) << dexp) - W'(1)));
    end
    fy_sh[0] = fy_sh[0] | sticky;

    sum = (sx == sy) ? (fx + fy_sh) : (fx - fy_sh);

    lz = 5'd0;
    for (int i = 0; i < W; i++)
      if (sum[i]) lz = 5'(W - 1 - i);
    norm   = sum << lz;
    e_norm = $signed({2'b00, ex}) + 10'sd1 - $signed({5'd0, lz});

    mant_r   = norm[W-1 -: 8];           // hidden + 7 mantissa bits
    guard    = norm[W-9];
    rest     = |norm[W-10:0];
    rnd_up   = guard & (rest | mant_r[0]);
    mant_inc = {1'b0, mant_r} + 9'(rnd_up);
    e_fin    = e_norm;
    if (mant_inc[8]) begin
      mant_inc = mant_inc >> 1;
      e_fin    = e_norm + 10'sd1;
    end

    if (sum == '0)             y = 16'h0000;
    else if (e_fin <= 10'sd0)  y = {sx, 15'd0};
    else if (e_fin >= 10'sd255) y = {sx, 8'hFF, 7'd0};
    else                       y = {sx, e_fin[7:0], mant_inc[6:0]};
  end
endmodule
