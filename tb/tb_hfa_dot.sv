// tb_hfa_dot -- checks the BF16 dot product against a real-arithmetic sum
// of the exact products.  Allowed error: half a BF16 ulp of the result for
// the final rounding, one ulp margin, plus D times the alignment truncation
// step 2^(emax-GUARD-14).  Also checks the two-cycle latency and that the
// pipeline holds while en=0.
module tb_hfa_dot;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  localparam int D = 16;
  logic clk = 0;
  logic en;
  bf16_t [D-1:0] q, k;
  bf16_t s;
  int checks = 0, failures = 0;
  real exact_q[$];
  real tol_q[$];
  hfa_dot #(.D(D)) dut (.clk(clk), .en(en), .q(q), .k(k), .s(s));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic void mkvec(input int mode);
    for (int i = 0; i < D; i++) begin
      q[i] = rand_bf(-3, 2, 1);
      k[i] = rand_bf(-3, 2, 1);
      if (mode == 1 && i > 0) k[i] = {~k[0][15] ^ q[i][15] ^ q[0][15], k[i][14:0]};
      if (mode == 2 && i % 3 == 0) q[i] = 16'h0000;
    end
  endfunction

  task automatic step_and_check(input bit push);
    real ex, pmax, tol, p;
    if (push) begin
      ex = 0.0; pmax = 0.0;
      for (int i = 0; i < D; i++) begin
        p = bf2r(q[i]) * bf2r(k[i]);
        ex += p;
        if (absr(p) > pmax) pmax = absr(p);
      end
      tol = absr(ex) * (1.5 / 128.0) + real'(D) * pmax * (2.0 ** (-(8 + 6)));
      exact_q.push_back(ex);
      tol_q.push_back(tol);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    real ex, tol;
    en = 1;
    for (int n = 0; n < 3000; n++) begin
      mkvec(n % 3);
      step_and_check(1);
      if (exact_q.size() > 1) begin
        ex = exact_q.pop_front(); tol = tol_q.pop_front();
        checks++;
        if (absr(bf2r(s) - ex) > tol) begin
          failures++;
          if (failures < 10) $display("FAIL s=%h (%f) exact %f tol %f", s, bf2r(s), ex, tol);
        end
      end
    end
    // latency: a known vector appears exactly 2 enabled cycles later and holds while en=0
    for (int i = 0; i < D; i++) begin q[i] = 16'h3F80; k[i] = 16'h4000; end  // 16 * 2 = 32
    @(posedge clk); #1;
    for (int i = 0; i < D; i++) q[i] = 16'h0000;
    @(posedge clk); #1;
    checks++; if (s !== 16'h4200) begin failures++; $display("FAIL latency s=%h", s); end
    en = 0;
    repeat (3) @(posedge clk); #1;
    checks++; if (s !== 16'h4200) begin failures++; $display("FAIL hold s=%h", s); end
    en = 1;
    @(posedge clk); #1;
    checks++; if (s !== 16'h0000) begin failures++; $display("FAIL next s=%h", s); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
