// tb_hfa_acc -- checks the ACC merge unit (D = 4).  Two independent random
// streams of partial triplets (FAU side a, upstream side b), each with
// random valid gaps, and random output back-pressure.  For every merged
// triplet it checks m = max(m_a, m_b) exactly and, lane by lane, the value
// O_a e^(m_a-m_n) + O_b e^(m_b-m_n) computed in real arithmetic: for equal
// signs log2|.| within 0.12, for opposite signs the Mitchell form
// max(A,B) - 2^-|A-B| within 0.06 and the sign of the larger term.
// Handshake: an input is taken only when both are valid, the output is
// registered (one cycle) and holds while y_ready is low.
module tb_hfa_acc;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  localparam int D = 4;
  localparam int NITEMS = 400;
  localparam real LOG2E = 1.4426950408889634;
  logic clk = 0, rst_n = 0;
  logic a_valid = 0, a_ready, b_valid = 0, b_ready, y_valid, y_ready = 0;
  bf16_t a_m, b_m, y_m;
  logic [D:0] a_sgn, b_sgn, y_sgn;
  lns_t [D:0] a_lg, b_lg, y_lg;
  int checks = 0, failures = 0, got = 0, n_sub = 0, n_a_larger = 0, n_b_larger = 0;

  // packed copies of what was sent
  logic [16+(D+1)*17-1:0] qa_items[$], qb_items[$];

  hfa_acc #(.D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic rand_trip(output bf16_t m, output logic [D:0] sg, output lns_t [D:0] lg);
    m = rand_bf(-1, 3, 1);
    for (int j = 0; j <= D; j++) begin
      sg[j] = (j == 0) ? 1'b0 : 1'($urandom_range(1));
      lg[j] = lns_t'($signed(int'($urandom_range(1600)) - 800));
    end
  endtask

  always @(posedge clk) y_ready <= ($urandom_range(2) != 0);

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < NITEMS; n++) begin
      while ($urandom_range(2) == 0) begin a_valid = 0; @(posedge clk); #1; end
      rand_trip(a_m, a_sgn, a_lg); a_valid = 1;
      qa_items.push_back({a_m, a_sgn, a_lg});
      @(posedge clk); while (!a_ready) @(posedge clk); #1;
      a_valid = 0;
    end
  end
  initial begin
    repeat (2) @(posedge clk); #1;
    for (int n = 0; n < NITEMS; n++) begin
      while ($urandom_range(2) == 0) begin b_valid = 0; @(posedge clk); #1; end
      rand_trip(b_m, b_sgn, b_lg); b_valid = 1;
      qb_items.push_back({b_m, b_sgn, b_lg});
      @(posedge clk); while (!b_ready) @(posedge clk); #1;
      b_valid = 0;
    end
  end

  logic y_hold = 0;
  lns_t [D:0] y_lg_d;
  always @(posedge clk) begin
    // handshake rules
    if (rst_n) begin
      if (a_ready && !(a_valid && b_valid)) begin failures++; $display("FAIL a_ready without both valid"); end
      if (a_ready != b_ready) begin failures++; $display("FAIL ready mismatch"); end
      if (y_hold) begin
        checks++;
        if (!y_valid || y_lg !== y_lg_d) begin failures++; $display("FAIL output not held"); end
      end
    end
    y_hold <= y_valid && !y_ready;
    y_lg_d <= y_lg;
    if (rst_n && y_valid && y_ready) begin
      bf16_t am, bm;
      logic [D:0] asg, bsg;
      lns_t [D:0] alg, blg;
      real ma, mb, mn, A, B, va, vb, v, mx, f;
      {am, asg, alg} = qa_items.pop_front();
      {bm, bsg, blg} = qb_items.pop_front();
      ma = bf2r(am); mb = bf2r(bm); mn = (ma > mb) ? ma : mb;
      checks++;
      if (bf2r(y_m) != mn) begin failures++; $display("FAIL m"); end
      if (ma > mb) n_a_larger++; else n_b_larger++;
      for (int j = 0; j <= D; j++) begin
        A = real'(alg[j]) / 128.0 + ((ma - mn < -15.0) ? -15.0 : ma - mn) * LOG2E;
        B = real'(blg[j]) / 128.0 + ((mb - mn < -15.0) ? -15.0 : mb - mn) * LOG2E;
        checks++;
        if (asg[j] == bsg[j]) begin
          v = log2r(2.0 ** A + 2.0 ** B);
          if (absr(real'(y_lg[j]) / 128.0 - v) > 0.12 || y_sgn[j] != asg[j]) begin
            failures++; $display("FAIL lane %0d add: %f exp %f", j, real'(y_lg[j]) / 128.0, v);
          end
        end else begin
          n_sub++;
          mx = (A > B) ? A : B;
          f = mx - 2.0 ** (-absr(A - B));
          if (absr(real'(y_lg[j]) / 128.0 - f) > 0.06 ||
              (absr(A - B) > 0.1 && y_sgn[j] != ((A > B) ? asg[j] : bsg[j]))) begin
            failures++; $display("FAIL lane %0d sub: %f exp %f", j, real'(y_lg[j]) / 128.0, f);
          end
        end
      end
      got++;
      if (got == NITEMS) begin
        checks++; if (n_sub == 0 || n_a_larger == 0 || n_b_larger == 0) failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
