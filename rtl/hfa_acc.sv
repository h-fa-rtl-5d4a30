// hfa_acc -- merges two partial attention triplets in the log domain.
//
// Partial results of two KV sub-blocks, (m_A, s_A, log2|O_A|) from the
// block-FAU on input a and (m_B, s_B, log2|O_B|) from the preceding ACC on
// input b, combine as
//   m_N = max(m_A, m_B)
//   O_N = O_A e^(m_A-m_N) + O_B e^(m_B-m_N)     (every lane, l included)
// using one hfa_score_diff for the two scale terms and D+1 hfa_lns_lane
// units: the same arithmetic as the FAU update, as in the paper.  Only the
// maximum and the two differences are BF16; the rest is fixed point.
// Handshake: the merge fires when both inputs are valid and the output
// register is free or being emptied; both inputs are then acknowledged in
// the same cycle.  The result is registered: one cycle of latency.
// The handshake assertion is disabled during reset with rst_n, so lint sees
// rst_n used both asynchronously and synchronously; that is intended.
module hfa_acc
  import hfa_pkg::*;
#(
  parameter int unsigned D = 64
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         a_valid,
  output logic         a_ready,
  input  bf16_t        a_m,
  input  logic [D:0]   a_sgn,
  input  lns_t [D:0]   a_lg,
  input  logic         b_valid,
  output logic         b_ready,
  input  bf16_t        b_m,
  input  logic [D:0]   b_sgn,
  input  lns_t [D:0]   b_lg,
  output logic         y_valid,
  input  logic         y_ready,
  output bf16_t        y_m,
  output logic [D:0]   y_sgn,
  output lns_t [D:0]   y_lg
);
  logic       fire;
  bf16_t      m_n;
  lns_t       qa, qb;
  logic [D:0] sg_n;
  lns_t [D:0] lg_n;

  assign fire    = a_valid && b_valid && (!y_valid || y_ready);
  assign a_ready = fire;
  assign b_ready = fire;

  hfa_score_diff u_diff (.m_a(a_m), .m_b(b_m), .m_n(m_n), .qa(qa), .qb(qb));

  for (genvar j = 0; j <= D; j++) begin : g_lane
    hfa_lns_lane u_lane (
      .lg_a(a_lg[j]), .s_a(a_sgn[j]),
      .lg_b(b_lg[j]), .s_b(b_sgn[j]),
      .qa(qa), .qb(qb),
      .lg_y(lg_n[j]), .s_y(sg_n[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      y_valid <= 1'b0;
    else if (fire)   y_valid <= 1'b1;
    else if (y_ready) y_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      y_m   <= m_n;
      y_sgn <= sg_n;
      y_lg  <= lg_n;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (y_valid && !y_ready) |=> y_valid && $stable(y_lg));
endmodule
