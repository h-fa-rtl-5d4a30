// tb_hfa_top_full -- the accelerator at its full size (D = 64, P = 4 KV
// sub-blocks, N = 1024 rows, 256 per sub-block), no parameter overrides.
// Loads all 1024 key/value rows, then runs three queries back to back: two
// over the full sequence of 1024 rows and one over 4 x 100 rows.  Each
// attention vector is compared with softmax(q K^T) V in real arithmetic
// (log2 error within 0.5, same sign); values are positive in even lanes and
// negative in odd lanes.  Also checks the streaming time: the last row of a
// full-length query is taken 256 cycles after the query is accepted, and
// the result follows 3 + P cycles later.
module tb_hfa_top_full;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  localparam int D = 64, P = 4, N = 1024, ROWS = N / P, AW = 8, BW = 2;
  logic clk = 0, rst_n = 0;
  logic kv_we = 0;
  logic [BW-1:0] kv_blk = '0;
  logic [AW-1:0] kv_row = '0;
  bf16_t [D-1:0] kv_k, kv_v, q, o_attn;
  logic [AW:0] rows;
  logic q_valid = 0, q_ready, o_valid, o_ready = 1;
  bf16_t o_m;

  bf16_t Km[N][D];
  bf16_t Vm[N][D];
  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  real worst = 0.0;
  real exp_o[$];
  int  exp_rows[$], q_cycle[$], lf_cycle[$];

  hfa_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && q_valid && q_ready) q_cycle.push_back(cycle);
    if (rst_n && dut.fire && dut.rd_last) lf_cycle.push_back(cycle);
    if (rst_n && o_valid && o_ready) begin
      real e, d, got;
      int r, qc, lf;
      r = exp_rows.pop_front(); qc = q_cycle.pop_front(); lf = lf_cycle.pop_front();
      checks++;
      if (lf - qc != r || cycle - lf != 3 + P) begin
        failures++; $display("FAIL timing: rows %0d in %0d cycles, result after %0d", r, lf - qc, cycle - lf);
      end
      for (int j = 0; j < D; j++) begin
        e = exp_o.pop_front();
        got = bf2r(o_attn[j]);
        d = absr(log2r(absr(got)) - log2r(absr(e)));
        if (d > worst) worst = d;
        checks++;
        if (d > 0.5 || (got < 0.0) != (e < 0.0)) begin
          failures++; if (failures < 10) $display("FAIL lane %0d: %f exp %f", j, got, e);
        end
      end
      n_out++;
    end
  end

  initial begin
    bf16_t qv[3][D];
    int rq[3];
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      for (int j = 0; j < D; j++) begin
        Km[r][j] = rand_bf(-4, -1, 1);
        Vm[r][j] = rand_bf(-3, 2, 0);
        if (j % 2 == 1) Vm[r][j][15] = 1'b1;
        kv_k[j] = Km[r][j]; kv_v[j] = Vm[r][j];
      end
      kv_we = 1; kv_blk = BW'(r / ROWS); kv_row = AW'(r % ROWS);
      @(posedge clk); #1;
    end
    kv_we = 0;
    rq[0] = ROWS; rq[1] = 100; rq[2] = ROWS;
    for (int n = 0; n < 3; n++) begin
      real s[$];
      real m, l, o;
      s.delete();
      for (int j = 0; j < D; j++) qv[n][j] = rand_bf(-2, 1, 1);
      m = -1.0e300; l = 0.0;
      for (int b = 0; b < P; b++)
        for (int i = 0; i < rq[n]; i++) begin
          real t;
          t = 0.0;
          for (int j = 0; j < D; j++) t += bf2r(qv[n][j]) * bf2r(Km[b*ROWS+i][j]);
          s.push_back(t);
          if (t > m) m = t;
        end
      foreach (s[x]) l += $exp(s[x] - m);
      for (int j = 0; j < D; j++) begin
        o = 0.0;
        for (int b = 0; b < P; b++)
          for (int i = 0; i < rq[n]; i++) o += $exp(s[b*rq[n]+i] - m) * bf2r(Vm[b*ROWS+i][j]);
        exp_o.push_back(o / l);
      end
      exp_rows.push_back(rq[n]);
    end
    for (int n = 0; n < 3; n++) begin
      for (int j = 0; j < D; j++) q[j] = qv[n][j];
      rows = (AW+1)'(rq[n]);
      q_valid = 1;
      @(posedge clk);
      while (!q_ready) @(posedge clk);
      #1;
    end
    q_valid = 0;
    wait (n_out == 3);
    $display("worst log2 error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
