// hfa_tb_pkg -- reference arithmetic for the H-FA testbenches.
//
// Conversions between BFloat16 bit patterns and real numbers, computed with
// real arithmetic independently of the RTL, plus a small check counter.
package hfa_tb_pkg;

  function automatic real bf2r(input logic [15:0] b);
    int e;
    real v;
    e = int'(b[14:7]);
    if (e == 0) return 0.0;
    v = (1.0 + real'(b[6:0]) / 128.0) * (2.0 ** (e - 127));
    return b[15] ? -v : v;
  endfunction

  // Round a real to BF16, nearest-even; subnormals flush to signed zero.
  function automatic logic [15:0] r2bf(input real x);
    logic s;
    real  ax, t, fl, rem;
    int   e, be;
    s = (x < 0.0);
    ax = s ? -x : x;
    if (ax == 0.0) return {s, 15'd0};
    e = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0)  begin ax = ax * 2.0; e--; end
    t   = (ax - 1.0) * 128.0;
    fl  = $floor(t);
    rem = t - fl;
    if (rem > 0.5 || (rem == 0.5 && (int'(fl) % 2 == 1))) fl = fl + 1.0;
    if (fl >= 128.0) begin fl = 0.0; e++; end
    be = e + 127;
    if (be <= 0)   return {s, 15'd0};
    if (be >= 255) return {s, 8'hFF, 7'd0};
    return {s, 8'(be), 7'(int'(fl))};
  endfunction

  function automatic real log2r(input real x);
    return $ln(x) / $ln(2.0);
  endfunction

  function automatic real absr(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Random BF16 with exponent in [127+elo, 127+ehi] and random sign.
  function automatic logic [15:0] rand_bf(input int elo, input int ehi, input bit allow_neg);
    logic s;
    int   e;
    s = allow_neg ? 1'($urandom_range(1)) : 1'b0;
    e = 127 + elo + int'($urandom_range(ehi - elo));
    return {s, 8'(e), 7'($urandom_range(127))};
  endfunction

endpackage
