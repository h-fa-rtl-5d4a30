// tb_hfa_fau -- checks a block-FAU (D = 8) against FlashAttention computed
// in real arithmetic.  Each frame streams R random key/value rows for one
// query, with random input bubbles and random output back-pressure.  Per
// frame it checks:
//   * m equals the maximum exact score (within BF16 rounding of the score),
//   * log2 l and, for value vectors of one sign, log2|o_j| against the
//     exact sums within 0.35 (approximations: Mitchell in log2 v and in each
//     log-domain add, PWL 2^-x, 7-bit quantisation),
//   * the signs of o_j (all values negative in every third frame).
// Timing: out_valid must rise exactly 3 enabled cycles after the last row
// is taken,
// and in_ready may drop only while a result waits for out_ready.
module tb_hfa_fau;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  localparam int D = 8;
  localparam int FRAMES = 60;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0;
  bf16_t [D-1:0] q, k, v;
  logic out_valid, out_ready;
  bf16_t out_m;
  logic [D:0] out_sgn;
  lns_t [D:0] out_lg;
  int checks = 0, failures = 0, frames_done = 0, n_newmax = 0, n_stall = 0;
  real worst = 0.0;

  // expected results per frame
  real exp_m[$], exp_l[$];
  real exp_o[$];
  int  exp_mode[$];
  int  take_q[$];
  int  cycle = 0, en_edges = 0;

  hfa_fau #(.D(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // back-pressure
  always @(posedge clk) out_ready <= ($urandom_range(3) == 0);

  // producer
  initial begin
    int R, mode;
    real s, m, l;
    real o[D];
    real srow[$];
    bf16_t kr[$];
    bf16_t vr[$];
    bf16_t kk[D], vv[D];
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      R = (f % 4 == 3) ? 1 : 1 + int'($urandom_range(40));
      mode = f % 3;
      for (int j = 0; j < D; j++) q[j] = rand_bf(-2, 1, 1);
      m = -1.0e300; l = 0.0;
      for (int j = 0; j < D; j++) o[j] = 0.0;
      kr.delete(); vr.delete(); srow.delete();
      for (int i = 0; i < R; i++) begin
        s = 0.0;
        for (int j = 0; j < D; j++) begin
          kk[j] = rand_bf(-2, 1, 1);
          s += bf2r(q[j]) * bf2r(kk[j]);
          vv[j] = rand_bf(-3, 2, 0);
          if (mode == 1) vv[j][15] = 1'b1;
          if (mode == 2) vv[j][15] = 1'($urandom_range(1));
        end
        for (int j = 0; j < D; j++) begin kr.push_back(kk[j]); vr.push_back(vv[j]); end srow.push_back(s);
        if (s > m) m = s;
      end
      for (int i = 0; i < R; i++) begin
        l += $exp(srow[i] - m);
        for (int j = 0; j < D; j++) o[j] += $exp(srow[i] - m) * bf2r(vr[i*D+j]);
      end
      exp_m.push_back(m); exp_l.push_back(l); for (int j = 0; j < D; j++) exp_o.push_back(o[j]); exp_mode.push_back(mode);
      for (int i = 0; i < R; i++) begin
        while ($urandom_range(4) == 0) begin in_valid = 0; @(posedge clk); #1; end
        in_valid = 1; in_first = (i == 0); in_last = (i == R - 1);
        for (int j = 0; j < D; j++) begin k[j] = kr[i*D+j]; v[j] = vr[i*D+j]; end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1;
      end
      in_valid = 0; in_first = 0; in_last = 0;
    end
  end

  // timing checks
  logic out_valid_d = 0, took_d = 0;
  always @(posedge clk) begin
    out_valid_d <= out_valid;
    took_d <= out_valid && out_ready;
    if (dut.en) en_edges <= en_edges + 1;
    if (rst_n && in_valid && in_ready && in_last) take_q.push_back(en_edges);
    if (rst_n && out_valid && (!out_valid_d || took_d)) begin
      int t;
      t = take_q.pop_front();
      checks++;
      if (en_edges - t != 3) begin
        failures++; $display("FAIL latency %0d", en_edges - t);
      end
    end
    if (rst_n && !in_ready) begin
      n_stall++;
      checks++;
      if (!(out_valid && !out_ready)) begin failures++; $display("FAIL in_ready low without a waiting result"); end
    end
    if (rst_n && dut.vld2 && dut.en && dut.m_new != dut.m_prev && !dut.fst2) n_newmax++;
  end

  // consumer
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      real m, l, e, tol;
      real o[D];
      int mode;
      m = exp_m.pop_front(); l = exp_l.pop_front(); for (int j = 0; j < D; j++) o[j] = exp_o.pop_front(); mode = exp_mode.pop_front();
      checks++;
      if (absr(bf2r(out_m) - m) > absr(m) / 128.0 + 1e-30) begin
        failures++; $display("FAIL m=%f exp %f", bf2r(out_m), m);
      end
      e = absr(real'(out_lg[0]) / 128.0 - log2r(l));
      if (e > worst) worst = e;
      checks++;
      if (e > 0.35 || out_sgn[0]) begin failures++; $display("FAIL l: %f exp %f", real'(out_lg[0]) / 128.0, log2r(l)); end
      for (int j = 0; j < D; j++) begin
        if (mode != 2) begin
          e = absr(real'(out_lg[j+1]) / 128.0 - log2r(absr(o[j])));
          if (e > worst) worst = e;
          checks++;
          if (e > 0.35 || out_sgn[j+1] != (mode == 1)) begin
            failures++; $display("FAIL o[%0d]: %f exp %f sign %b", j, real'(out_lg[j+1]) / 128.0, log2r(absr(o[j])), out_sgn[j+1]);
          end
        end
      end
      frames_done++;
      if (frames_done == FRAMES) begin
        checks++; if (n_stall == 0 || n_newmax == 0) failures++;
        $display("worst log2 error %f, stalls %0d, new maxima %0d", worst, n_stall, n_newmax);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
