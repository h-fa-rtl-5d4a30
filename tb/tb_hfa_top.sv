// tb_hfa_top -- end-to-end test of the H-FA accelerator at reduced size
// (D = 8, P = 4 sub-blocks, N = 64 rows, so 16 rows per sub-block).
//
// The key/value buffers are loaded with random BF16 data, then a series of
// queries is sent with different row counts.  Every attention vector is
// compared with softmax(q K^T) V computed in real arithmetic over the rows
// in use:  log2 of each output element must be within 0.5 of the exact
// value (the log-domain arithmetic approximates: Mitchell, PWL 2^-x,
// quantisation) and its sign must match.  Three phases:
//   1. positive values, no back-pressure: also checks one row per cycle,
//      back-to-back queries and the 3+P cycle latency from the last row to
//      the result;
//   2. odd lanes negative, random back-pressure on o_ready (stalls);
//   3. random signs per element (log-domain subtractions): m and l-driven
//      results are checked only where one sign dominates.
// Mechanisms counted (each must occur): pipeline stall, back-to-back query,
// partial row count, new running maximum, log-domain subtraction, ACC merge
// with the larger maximum on either side.
module tb_hfa_top;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  localparam int D = 8, P = 4, N = 64, ROWS = N / P, AW = 4, BW = 2;
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

  int checks = 0, failures = 0, cycle = 0, phase = 0;
  int n_stall = 0, n_b2b = 0, n_partial = 0, n_newmax = 0, n_sub = 0, n_acc_a = 0, n_acc_b = 0;
  real worst = 0.0;

  // expected results, one entry per query
  real exp_o[$];
  real exp_dom[$];
  real exp_m[$];
  int  exp_rows[$];
  int  q_cycle[$];
  int  last_fire_cycle[$];

  hfa_top #(.D(D), .P(P), .N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic load_kv(input int vmode);
    for (int r = 0; r < N; r++) begin
      for (int j = 0; j < D; j++) begin
        Km[r][j] = rand_bf(-2, 1, 1);
        Vm[r][j] = rand_bf(-3, 2, 0);
        if (vmode == 1 && j % 2 == 1) Vm[r][j][15] = 1'b1;
        if (vmode == 2) Vm[r][j][15] = 1'($urandom_range(1));
        kv_k[j] = Km[r][j]; kv_v[j] = Vm[r][j];
      end
      kv_we = 1; kv_blk = BW'(r / ROWS); kv_row = AW'(r % ROWS);
      @(posedge clk); #1;
    end
    kv_we = 0;
  endtask

  // reference attention for query qv over rows 0..r-1 of every sub-block
  task automatic reference(input bf16_t qv[D], input int r);
    real s[$];
    real m, l, o, a;
    m = -1.0e300; l = 0.0;
    for (int b = 0; b < P; b++)
      for (int i = 0; i < r; i++) begin
        real t;
        t = 0.0;
        for (int j = 0; j < D; j++) t += bf2r(qv[j]) * bf2r(Km[b*ROWS+i][j]);
        s.push_back(t);
        if (t > m) m = t;
      end
    foreach (s[x]) l += $exp(s[x] - m);
    for (int j = 0; j < D; j++) begin
      o = 0.0; a = 0.0;
      for (int b = 0; b < P; b++)
        for (int i = 0; i < r; i++) begin
          o += $exp(s[b*r+i] - m) * bf2r(Vm[b*ROWS+i][j]);
          a += $exp(s[b*r+i] - m) * absr(bf2r(Vm[b*ROWS+i][j]));
        end
      exp_o.push_back(o / l);
      exp_dom.push_back(absr(o) / a);   // 1.0 when all terms share a sign
    end
    exp_m.push_back(m);
    exp_rows.push_back(r);
  endtask

  task automatic send_queries(input int nq);
    bf16_t qv[D];
    int r;
    for (int n = 0; n < nq; n++) begin
      for (int j = 0; j < D; j++) qv[j] = rand_bf(-2, 1, 1);
      r = (n % 3 == 0) ? ROWS : 1 + int'($urandom_range(ROWS - 1));
      reference(qv, r);
      for (int j = 0; j < D; j++) q[j] = qv[j];
      rows = (AW+1)'(r);
      q_valid = 1;
      @(posedge clk);
      while (!q_ready) @(posedge clk);
      #1;
      q_valid = 0;
    end
  endtask

  int n_out = 0, total_q = 0;
  int nm_blk[P], ns_blk[P];

  for (genvar b = 0; b < P; b++) begin : g_mon
    initial begin nm_blk[b] = 0; ns_blk[b] = 0; end
    always @(posedge clk) begin
      if (rst_n && dut.g_blk[b].u_fau.vld2 && dut.g_blk[b].u_fau.en && !dut.g_blk[b].u_fau.fst2) begin
        if (dut.g_blk[b].u_fau.m_new != dut.g_blk[b].u_fau.m_prev) nm_blk[b]++;
        if (dut.g_blk[b].u_fau.sg_prev[D:1] != dut.g_blk[b].u_fau.sg_v[D:1]) ns_blk[b]++;
      end
    end
  end

  // monitors
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.rd_valid && !dut.fire) n_stall++;
      if (q_valid && q_ready) begin
        q_cycle.push_back(cycle);
        if (dut.fire && dut.rd_last) n_b2b++;  // previous query's last row taken now
        if (rows != (AW+1)'(ROWS)) n_partial++;
      end
      if (dut.fire && dut.rd_last) last_fire_cycle.push_back(cycle);
      if (dut.g_blk[1].u_acc.fire) begin
        if (dut.g_blk[1].u_acc.m_n == dut.g_blk[1].u_acc.a_m) n_acc_a++;
        else n_acc_b++;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && o_valid && o_ready) begin
      real e, d, got, mref;
      int r, qc, lf;
      r = exp_rows.pop_front();
      mref = exp_m.pop_front();
      qc = q_cycle.pop_front();
      lf = last_fire_cycle.pop_front();
      checks++;
      if (absr(bf2r(o_m) - mref) > absr(mref) / 64.0 + 1e-6) begin
        failures++; $display("FAIL m %f exp %f", bf2r(o_m), mref);
      end
      if (phase == 1) begin
        // latency from last row to result, and one row per cycle
        checks++;
        if (cycle - lf != 3 + P) begin failures++; $display("FAIL latency %0d", cycle - lf); end
        checks++;
        if (lf - qc != r) begin failures++; $display("FAIL rows %0d took %0d cycles", r, lf - qc); end
      end
      for (int j = 0; j < D; j++) begin
        e = exp_o.pop_front();
        d = exp_dom.pop_front();
        got = bf2r(o_attn[j]);
        if (d > 0.999) begin
          checks++;
          d = absr(log2r(absr(got)) - log2r(absr(e)));
          if (d > worst) worst = d;
          if (d > 0.5 || (got < 0.0) != (e < 0.0)) begin
            failures++; $display("FAIL q%0d lane %0d: %f exp %f", n_out, j, got, e);
          end
        end else if (d > 0.8) begin
          checks++;
          if ((got < 0.0) != (e < 0.0)) begin
            failures++; $display("FAIL sign q%0d lane %0d: %f exp %f", n_out, j, got, e);
          end
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    // phase 1
    phase = 1;
    load_kv(0);
    send_queries(8); total_q += 8;
    wait (n_out == total_q);
    // phase 2: back-pressure
    phase = 2;
    @(posedge clk); #1;
    load_kv(1);
    fork
      begin send_queries(10); end
      begin
        repeat (20) begin
          o_ready = 0; repeat (10 + $urandom_range(30)) @(posedge clk); #1;
          o_ready = 1; repeat (1 + $urandom_range(2)) @(posedge clk); #1;
        end
        o_ready = 1;
      end
    join
    total_q += 10;
    wait (n_out == total_q);
    // phase 3: mixed signs
    phase = 3;
    @(posedge clk); #1;
    load_kv(2);
    send_queries(8); total_q += 8;
    wait (n_out == total_q);
    repeat (5) @(posedge clk);
    for (int b = 0; b < P; b++) begin n_newmax += nm_blk[b]; n_sub += ns_blk[b]; end
    $display("worst log2 error %f", worst);
    $display("stalls %0d back-to-back %0d partial %0d newmax %0d lns-sub %0d acc-a %0d acc-b %0d",
             n_stall, n_b2b, n_partial, n_newmax, n_sub, n_acc_a, n_acc_b);
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no stall"); end
    checks++; if (n_b2b == 0)     begin failures++; $display("FAIL no back-to-back query"); end
    checks++; if (n_partial == 0) begin failures++; $display("FAIL no partial row count"); end
    checks++; if (n_newmax == 0)  begin failures++; $display("FAIL no new maximum"); end
    checks++; if (n_sub == 0)     begin failures++; $display("FAIL no log subtraction"); end
    checks++; if (n_acc_a == 0 || n_acc_b == 0) begin failures++; $display("FAIL ACC sides"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
