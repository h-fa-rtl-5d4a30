// hfa_pow2_pwl -- evaluates 2^-x for an unsigned fixed-point x (combinational).
//
// x = p + f with integer part p and fraction f in [0,1).  Then
// 2^-x = 2^-f >> p.  2^-f comes from a piecewise-linear approximation on
// SEGMENTS uniform segments of [0,1); the segment is picked by the top
// fraction bits and its line c0 - c1*f is read from a small table.  The
// split into a shift and a PWL table with 8 uniform segments follows the
// paper; the coefficients are this design's own least-squares fit of 2^-f on
// each segment [k/8,(k+1)/8), scaled by 4096 and rounded:
//   c0 = round(4096*a_k), c1 = round(-4096*b_k), 2^-f ~ a_k + b_k*f.
// The line is evaluated with 12 fraction bits, shifted right by p and
// rounded to 7 fraction bits, the LNS format.  Output 1.0 is code 128.
module hfa_pow2_pwl
  import hfa_pkg::*;
#(
  parameter int unsigned SEGMENTS = 8     // must stay 8: table below
)(
  input  logic [LNS_W-1:0] x,   // unsigned, 7 fraction bits
  output logic [7:0]       y    // unsigned 1.7
);
  localparam int SEG_BITS = $clog2(SEGMENTS);

  function automatic logic [11:0] c0_lut(input logic [2:0] idx);
    case (idx)
      3'd0: return 12'd4094;   // 0.99940
      3'd1: return 12'd4065;   // 0.99255
      3'd2: return 12'd4014;   // 0.97995
      3'd3: return 12'd3943;   // 0.96261
      3'd4: return 12'd3856;   // 0.94140
      3'd5: return 12'd3756;   // 0.91708
      3'd6: return 12'd3647;   // 0.89031
      default: return 12'd3529; // 0.86166
    endcase
  endfunction

  function automatic logic [11:0] c1_lut(input logic [2:0] idx);
    case (idx)
      3'd0: return 12'd2719;   // 0.66388
      3'd1: return 12'd2494;   // 0.60878
      3'd2: return 12'd2287;   // 0.55826
      3'd3: return 12'd2097;   // 0.51193
      3'd4: return 12'd1923;   // 0.46944
      3'd5: return 12'd1763;   // 0.43048
      3'd6: return 12'd1617;   // 0.39475
      default: return 12'd1483; // 0.36199
    endcase
  endfunction

  logic [8:0]  p;
  logic [6:0]  f;
  logic [2:0]  seg;
  logic [18:0] prod;
  logic [12:0] y12;     // 2^-f with 12 fraction bits
  logic [12:0] y_sh;
  logic [8:0]  y_rnd;

  always_comb begin
    p    = x[LNS_W-1:LNS_FRAC];
    f    = x[LNS_FRAC-1:0];
    seg  = f[6 -: SEG_BITS];
    prod = c1_lut(seg) * f;                            // 12+7 fraction bits
    y12  = 13'(c0_lut(seg)) - 13'(prod >> LNS_FRAC);
    y_sh = (p >= 9'd13) ? 13'd0 : (y12 >> p);
    y_rnd = 9'((y_sh + 13'd16) >> 5);                  // to 7 fraction bits
    y    = (y_rnd > 9'd128) ? 8'd128 : y_rnd[7:0];
  end
endmodule
