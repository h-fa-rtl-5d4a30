// hfa_dot -- BFloat16 dot product s = q . k with a two-stage pipeline.
//
// Stage 1 forms the D products exactly: sign XOR, exponent sum and the 8x8
// bit significand product (no rounding).  Stage 2 is one multi-operand
// floating-point addition: all products are aligned to the largest exponent
// (right shift, GUARD extra bits kept, the rest truncated), summed as signed
// integers, normalised by a leading-one search and rounded once, to nearest
// even, to BF16.  The paper uses a multi-operand adder from the literature
// without describing it; this max-exponent-alignment adder is the simplest
// one that computes the same function, and its guard width and the
// flush-to-zero of subnormals are this design's choices.
// Timing: the score for inputs presented with en=1 appears on s after two
// more cycles in which en=1 (both pipeline registers advance only with en).
module hfa_dot
  import hfa_pkg::*;
#(
  parameter int unsigned D     = 64,
  parameter int unsigned GUARD = 8
)(
  input  logic              clk,
  input  logic              en,
  input  bf16_t [D-1:0]     q,
  input  bf16_t [D-1:0]     k,
  output bf16_t             s
);
  localparam int MW = 16 + GUARD;                 // aligned product width
  localparam int W  = MW + $clog2(D) + 1;         // magnitude of the sum
  localparam int LW = $clog2(W);

  // ---------------- stage 1: exact products ----------------
  logic [D-1:0]        p_s;
  logic [D-1:0][8:0]   p_e;     // biased exponent sum (0 = product is zero)
  logic [D-1:0][15:0]  p_m;     // significand product, 2 int + 14 frac bits

  always_ff @(posedge clk) begin
    if (en) begin
      for (int i = 0; i < D; i++) begin
        p_s[i] <= q[i][15] ^ k[i][15];
        if (q[i][14:7] == 8'd0 || k[i][14:7] == 8'd0) begin
          p_e[i] <= 9'd0;
          p_m[i] <= 16'd0;
        end else begin
          p_e[i] <= 9'(q[i][14:7]) + 9'(k[i][14:7]);
          p_m[i] <= 16'({1'b1, q[i][6:0]}) * 16'({1'b1, k[i][6:0]});
        end
      end
    end
  end

  // ---------------- stage 2: aligned multi-operand addition ----------------
  logic [8:0]            emax;
  logic signed [W:0]     acc;
  logic [W-1:0]          mag;
  logic                  sgn;
  logic [LW-1:0]         lead;
  logic [W-1:0]          norm;
  logic signed [11:0]    e_b;
  logic [7:0]            mant;
  logic                  g, st, up;
  logic [8:0]            mant_inc;
  bf16_t                 s_next;

  always_comb begin
    emax = 9'd0;
    for (int i = 0; i < D; i++)
      if (p_e[i] > emax) emax = p_e[i];

    acc = '0;
    for (int i = 0; i < D; i++) begin
      logic [MW-1:0] al;
      logic [8:0]    sh;
      sh = emax - p_e[i];
      al = (sh >= 9'(MW)) ? '0 : ({p_m[i], GUARD'(0)} >> sh);
      if (p_s[i]) acc = acc - $signed((W+1)'(al));
      else        acc = acc + $signed((W+1)'(al));
    end

    sgn  = acc[W];
    mag  = sgn ? W'(-acc) : W'(acc);
    lead = '0;
    for (int i = 0; i < W; i++)
      if (mag[i]) lead = LW'(i);
    norm = mag << (LW'(W - 1) - lead);

    // value = mag * 2^(emax - 254 - 14 - GUARD); leading one at bit `lead`
    e_b  = $signed({3'd0, emax}) + $signed({{(12-LW){1'b0}}, lead})
           - 12'sd141 - 12'(GUARD);
    mant = norm[W-1 -: 8];
    g    = norm[W-9];
    st   = |norm[W-10:0];
    up   = g & (st | mant[0]);
    mant_inc = {1'b0, mant} + 9'(up);
    if (mant_inc[8]) begin
      mant_inc = mant_inc >> 1;
      e_b      = e_b + 12'sd1;
    end

    if (mag == '0)            s_next = 16'h0000;
    else if (e_b <= 12'sd0)   s_next = {sgn, 15'd0};
    else if (e_b >= 12'sd255) s_next = {sgn, 8'hFF, 7'd0};
    else                      s_next = {sgn, e_b[7:0], mant_inc[6:0]};
  end

  always_ff @(posedge clk)
    if (en) s <= s_next;
endmodule
