// hfa_fau -- logarithmic FlashAttention unit (block-FAU) for one query.
//
// Streams the key/value rows of one KV sub-block, one row per cycle, and
// keeps the FlashAttention-2 state of one query:
//   s_i = q . k_i                               (BF16, hfa_dot)
//   m_i = max(m_{i-1}, s_i)                     (BF16)
//   O_i = O_{i-1} e^(m_{i-1}-m_i) + V_i e^(s_i-m_i)   (log domain)
// with O = [l, o] and V = [1, v]: lane 0 is the running sum of exponentials
// l, lanes 1..D the output vector.  O is held only as sign + log2|O| (9.7
// fixed point); each lane is one hfa_lns_lane whose scale terms come from a
// single hfa_score_diff, and v is brought into the log domain by hfa_log2.
// This is the unit the paper draws; for the multi-block organisation the
// final division is left to the LogDiv unit after the ACC chain.
//
// Pipeline: stage 1 products, stage 2 score (both inside hfa_dot, with v and
// the framing bits delayed alongside), then the state update.  The row
// flagged in_first restarts the state (m = most negative BF16, O = zero);
// the row flagged in_last also copies the updated state into the output
// triplet and raises out_valid.  The triplet is held in its own register,
// so the next block's rows keep streaming while it waits for out_ready;
// only when the next last row reaches the update stage with the old triplet
// still untaken does the whole pipeline stall (in_ready = 0).  Latency: the
// triplet is valid 3 cycles after the last row is accepted.  Initial values, the stall
// policy and the pipeline split are this design's choices.
// The overrun assertion is disabled during reset with rst_n, so lint sees
// rst_n used both asynchronously and synchronously; that is intended.
module hfa_fau
  import hfa_pkg::*;
#(
  parameter int unsigned D = 64
)(
  input  logic          clk,
  input  logic          rst_n,
  // row stream
  input  logic          in_valid,
  output logic          in_ready,
  input  logic          in_first,
  input  logic          in_last,
  input  bf16_t [D-1:0] q,
  input  bf16_t [D-1:0] k,
  input  bf16_t [D-1:0] v,
  // partial result triplet (m, sign, log2|O|), lane 0 = l
  output logic          out_valid,
  input  logic          out_ready,
  output bf16_t         out_m,
  output logic  [D:0]   out_sgn,
  output lns_t  [D:0]   out_lg
);
  // The pipeline stops only when the last row of a block reaches the state
  // update while the previous triplet is still waiting to be taken.
  logic en;
  logic vld1, fst1, lst1, vld2, fst2, lst2;
  assign en       = !(vld2 && lst2 && out_valid && !out_ready);
  assign in_ready = en;

  // ---------------- stages 1-2: score ----------------
  bf16_t s2;
  hfa_dot #(.D(D)) u_dot (.clk(clk), .en(en), .q(q), .k(k), .s(s2));

  bf16_t [D-1:0] v1, v2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {vld1, fst1, lst1, vld2, fst2, lst2} <= '0;
    end else if (en) begin
      vld1 <= in_valid;
      fst1 <= in_first;
      lst1 <= in_last;
      vld2 <= vld1;
      fst2 <= fst1;
      lst2 <= lst1;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      v1 <= v;
      v2 <= v1;
    end
  end

  // ---------------- stage 3: log-domain state update ----------------
  bf16_t       m_st, m_prev, m_new;
  logic [D:0]  sg_st, sg_prev, sg_v, sg_new;
  lns_t [D:0]  lg_st, lg_prev, lg_v, lg_new;
  lns_t        qa, qb;

  always_comb begin
    m_prev  = fst2 ? BF16_NEG_MAX : m_st;
    sg_prev = fst2 ? '0 : sg_st;
    lg_prev = fst2 ? {(D+1){LNS_MIN}} : lg_st;
  end

  // quant[(m_{i-1}-m_i) log2 e] for the old state, quant[(s_i-m_i) log2 e] for V_i
  hfa_score_diff u_diff (.m_a(m_prev), .m_b(s2), .m_n(m_new), .qa(qa), .qb(qb));

  // V_i = [1, v]: lane 0 is the constant 1 (log 0, positive)
  assign sg_v[0] = 1'b0;
  assign lg_v[0] = '0;

  for (genvar j = 0; j < D; j++) begin : g_log
    hfa_log2 u_log2 (.x(v2[j]), .s(sg_v[j+1]), .lg(lg_v[j+1]));
  end

  for (genvar j = 0; j <= D; j++) begin : g_lane
    hfa_lns_lane u_lane (
      .lg_a(lg_prev[j]), .s_a(sg_prev[j]),
      .lg_b(lg_v[j]),    .s_b(sg_v[j]),
      .qa(qa), .qb(qb),
      .lg_y(lg_new[j]),  .s_y(sg_new[j])
    );
  end

  always_ff @(posedge clk) begin
    if (en && vld2) begin
      m_st  <= m_new;
      sg_st <= sg_new;
      lg_st <= lg_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      out_valid <= 1'b0;
    else if (en && vld2 && lst2)
      out_valid <= 1'b1;
    else if (out_ready)
      out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (en && vld2 && lst2) begin
      out_m   <= m_new;
      out_sgn <= sg_new;
      out_lg  <= lg_new;
    end
  end

  // A new triplet must never overwrite one that has not been taken.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> $stable(out_lg) && out_valid);
endmodule
