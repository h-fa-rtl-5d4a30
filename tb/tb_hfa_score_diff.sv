// tb_hfa_score_diff -- checks the max / difference / quantise / log2(e) unit.
// m_n must be the larger input; qa and qb must approximate
// clamp(m_x - m_n, -15, 0) * log2(e) within the error of one BF16 rounding
// of the difference, 7-bit truncation and the 12-bit log2(e) constant.
// Saturated differences must give exactly floor(-15*128*5909/4096) = -2770.
module tb_hfa_score_diff;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  bf16_t ma, mb, mn;
  lns_t  qa, qb;
  int checks = 0, failures = 0;
  hfa_score_diff dut (.m_a(ma), .m_b(mb), .m_n(mn), .qa(qa), .qb(qb));

  function automatic real expect_q(input real d);
    if (d < -15.0) d = -15.0;
    return d * 1.4426950408889634;
  endfunction

  task automatic check();
    real a, b, n, ea, eb, tol_a, tol_b;
    #1;
    a = bf2r(ma); b = bf2r(mb);
    n = (a > b) ? a : b;
    ea = expect_q(a - n); eb = expect_q(b - n);
    tol_a = absr(ea) * 0.006 + 2.0 / 128.0;
    tol_b = absr(eb) * 0.006 + 2.0 / 128.0;
    checks++;
    if (bf2r(mn) != n || absr(real'(qa) / 128.0 - ea) > tol_a ||
        absr(real'(qb) / 128.0 - eb) > tol_b || qa > 0 || qb > 0) begin
      failures++;
      if (failures < 10)
        $display("FAIL ma=%h mb=%h mn=%h qa=%0d (%f) qb=%0d (%f)", ma, mb, mn, qa, ea, qb, eb);
    end
  endtask

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    ma = 16'h4040; mb = 16'h4040; check();                  // equal
    ma = BF16_NEG_MAX; mb = 16'hC000; check();               // initial max
    checks++; if (qa != -16'sd2770 || qb != 16'sd0) failures++;
    ma = 16'h3F80; mb = 16'h3F00; check();                   // 1 vs 0.5
    for (int i = 0; i < 20000; i++) begin
      ma = rand_bf(-6, 4, 1);
      mb = rand_bf(-6, 4, 1);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
