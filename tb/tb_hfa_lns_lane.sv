// tb_hfa_lns_lane -- checks one log-domain sum-of-products lane.
// For random LNS operands and scale terms it computes A and B in real
// arithmetic and checks (1) the sign rule (sign of the larger term),
// (2) the result against max(A,B) +/- 2^-|A-B| within 2/128, and (3) for
// equal signs the result against the exact log2(2^A + 2^B) within the
// Mitchell bound 0.0861 plus 2/128.  Saturation at the zero code is checked
// with an all-zero operand pair.
module tb_hfa_lns_lane;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  lns_t lg_a, lg_b, qa, qb, lg_y;
  logic s_a, s_b, s_y;
  int checks = 0, failures = 0, n_sub = 0;
  hfa_lns_lane dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real A, B, mx, d, f, ex;
    logic es;
    for (int i = 0; i < 20000; i++) begin
      lg_a = lns_t'($signed(int'($urandom_range(4000)) - 2000));
      lg_b = lns_t'($signed(int'($urandom_range(4000)) - 2000));
      qa   = lns_t'(-$signed(int'($urandom_range(2770))));
      qb   = (i % 3 == 0) ? '0 : lns_t'(-$signed(int'($urandom_range(2770))));
      s_a  = 1'($urandom_range(1));
      s_b  = 1'($urandom_range(1));
      #1;
      A = real'(lg_a + qa) / 128.0;
      B = real'(lg_b + qb) / 128.0;
      mx = (A > B) ? A : B;
      d  = absr(A - B);
      f  = (s_a == s_b) ? mx + 2.0 ** (-d) : mx - 2.0 ** (-d);
      es = (A > B) ? s_a : s_b;
      if (s_a != s_b) n_sub++;
      checks++;
      if (s_y !== es || absr(real'(lg_y) / 128.0 - f) > 2.0 / 128.0) begin
        failures++;
        if (failures < 10) $display("FAIL A=%f B=%f sa=%b sb=%b y=%f s=%b", A, B, s_a, s_b, real'(lg_y)/128.0, s_y);
      end
      if (s_a == s_b) begin
        ex = log2r(2.0 ** A + 2.0 ** B);
        checks++;
        if (absr(real'(lg_y) / 128.0 - ex) > 0.0861 + 2.0 / 128.0) begin
          failures++;
          if (failures < 10) $display("FAIL exact A=%f B=%f y=%f ex=%f", A, B, real'(lg_y)/128.0, ex);
        end
      end
    end
    // zero + zero stays at the bottom of the range (saturated, no wrap)
    lg_a = LNS_MIN; lg_b = LNS_MIN; qa = -16'sd2770; qb = -16'sd2770; s_a = 0; s_b = 0;
    #1; checks++;
    if (lg_y > -16'sd32000) failures++;
    checks++;
    if (n_sub == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
