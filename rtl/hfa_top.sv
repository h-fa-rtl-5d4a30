// hfa_top -- H-FA attention accelerator: one query against P parallel KV
// sub-blocks, FlashAttention-2 computed partly in the log domain.
//
// Organisation (as the paper draws it): the N key/value rows are split into
// P sub-blocks of ROWS = N/P rows, each in its own hfa_kv_buffer.  The query
// is broadcast to P block-FAUs that each stream their sub-block, one row per
// cycle, all P in lockstep.  Each FAU ends with a partial triplet
// (m, sign, log2|O|).  A vertical chain of P ACC units merges them: ACC j
// takes the triplet of FAU j and that of ACC j-1 (ACC 0 gets the identity
// triplet: max = most negative BF16, every element zero).  The last ACC
// feeds LogDiv, which divides by l in the log domain and returns the
// attention vector in BF16.
//
// Interface and timing (this design's own; the paper gives no controller):
//  * kv_we/kv_blk/kv_row/kv_k/kv_v write one row of a sub-block.  Load the
//    buffers before sending queries.
//  * rows (1..ROWS) is the number of valid rows in every sub-block, sampled
//    when a query is accepted.
//  * q_valid/q_ready accept one query.  Its first row is read from all
//    buffers in the cycle it is accepted, the rest at one row per cycle, so
//    one query occupies the FAUs for `rows` cycles and the next query
//    follows without a gap.  The query is broadcast from q_reg.
//  * o_valid/o_ready return the attention vector o_attn and the global
//    maximum score o_m.  Back-pressure on o_ready stalls the ACC chain and,
//    through it, the FAUs.
// c_ready[0], the ready of the identity input of ACC 0, is left unread:
// that input is a constant and is always valid.  The assertion that checks
// `rows` is disabled by rst_n, so lint sees rst_n used both as an
// asynchronous reset and as a synchronous signal; that is intended.
module hfa_top
  import hfa_pkg::*;
#(
  parameter int unsigned D  = 64,
  parameter int unsigned P  = 4,
  parameter int unsigned N  = 1024,
  localparam int unsigned ROWS = N / P,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned BW   = (P > 1) ? $clog2(P) : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  // KV buffer load port
  input  logic          kv_we,
  input  logic [BW-1:0] kv_blk,
  input  logic [AW-1:0] kv_row,
  input  bf16_t [D-1:0] kv_k,
  input  bf16_t [D-1:0] kv_v,
  // rows per sub-block for the next query
  input  logic [AW:0]   rows,
  // query stream
  input  logic          q_valid,
  output logic          q_ready,
  input  bf16_t [D-1:0] q,
  // attention result
  output logic          o_valid,
  input  logic          o_ready,
  output bf16_t [D-1:0] o_attn,
  output bf16_t         o_m
);
  // ---------------- row sequencer ----------------
  typedef enum logic {S_IDLE, S_STREAM} state_e;
  state_e        state;
  bf16_t [D-1:0] q_reg;
  logic [AW:0]   rows_reg;
  logic [AW:0]   row_cnt;
  logic          rd_valid, rd_first, rd_last;
  logic          issue, fire;
  logic [P-1:0]  fau_in_ready;

  logic          accept, can_issue;
  logic [AW:0]   rows_in, rd_row;

  // A row can be read when the read register is empty or is being taken.
  assign fire      = rd_valid && (&fau_in_ready);
  assign can_issue = !rd_valid || fire;
  assign q_ready   = (state == S_IDLE) && can_issue;
  assign accept    = q_valid && q_ready;
  assign rows_in   = (rows == '0) ? (AW+1)'(1) : rows;
  // the first row of a query is read in the cycle the query is accepted
  assign issue     = accept || ((state == S_STREAM) && can_issue);
  assign rd_row    = accept ? '0 : row_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      row_cnt  <= '0;
      rows_reg <= '0;
      rd_valid <= 1'b0;
      rd_first <= 1'b0;
      rd_last  <= 1'b0;
    end else begin
      if (issue) begin
        rd_valid <= 1'b1;
        rd_first <= accept;
        rd_last  <= accept ? (rows_in == (AW+1)'(1)) : (row_cnt == rows_reg - 1'b1);
        row_cnt  <= rd_row + 1'b1;
        if (accept) begin
          rows_reg <= rows_in;
          state    <= (rows_in == (AW+1)'(1)) ? S_IDLE : S_STREAM;
        end else if (row_cnt == rows_reg - 1'b1) begin
          state    <= S_IDLE;
        end
      end else if (fire) begin
        rd_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (q_valid && q_ready) q_reg <= q;

  // ---------------- KV buffers and block-FAUs ----------------
  logic [P-1:0]        f_valid, f_ready;
  bf16_t [P-1:0]       f_m;
  logic [P-1:0][D:0]   f_sgn;
  lns_t [P-1:0][D:0]   f_lg;

  // ACC chain: index j+1 is the output of ACC j, index 0 the identity
  logic [P:0]          c_valid, c_ready;
  bf16_t [P:0]         c_m;
  logic [P:0][D:0]     c_sgn;
  lns_t [P:0][D:0]     c_lg;

  for (genvar j = 0; j < P; j++) begin : g_blk
    bf16_t [D-1:0] rk, rv;

    hfa_kv_buffer #(.ROWS(ROWS), .D(D)) u_kv (
      .clk(clk),
      .we(kv_we && (kv_blk == BW'(j))), .waddr(kv_row), .wk(kv_k), .wv(kv_v),
      .re(issue), .raddr(rd_row[AW-1:0]), .rk(rk), .rv(rv)
    );

    hfa_fau #(.D(D)) u_fau (
      .clk(clk), .rst_n(rst_n),
      .in_valid(fire), .in_ready(fau_in_ready[j]),
      .in_first(rd_first), .in_last(rd_last),
      .q(q_reg), .k(rk), .v(rv),
      .out_valid(f_valid[j]), .out_ready(f_ready[j]),
      .out_m(f_m[j]), .out_sgn(f_sgn[j]), .out_lg(f_lg[j])
    );

    hfa_acc #(.D(D)) u_acc (
      .clk(clk), .rst_n(rst_n),
      .a_valid(f_valid[j]), .a_ready(f_ready[j]),
      .a_m(f_m[j]), .a_sgn(f_sgn[j]), .a_lg(f_lg[j]),
      .b_valid(c_valid[j]), .b_ready(c_ready[j]),
      .b_m(c_m[j]), .b_sgn(c_sgn[j]), .b_lg(c_lg[j]),
      .y_valid(c_valid[j+1]), .y_ready(c_ready[j+1]),
      .y_m(c_m[j+1]), .y_sgn(c_sgn[j+1]), .y_lg(c_lg[j+1])
    );
  end

  assign c_valid[0] = 1'b1;
  assign c_m[0]     = BF16_NEG_MAX;
  assign c_sgn[0]   = '0;
  assign c_lg[0]    = {(D+1){LNS_MIN}};

  // ---------------- final division and output ----------------
  hfa_logdiv #(.D(D)) u_logdiv (.sgn(c_sgn[P]), .lg(c_lg[P]), .attn(o_attn));

  assign o_valid    = c_valid[P];
  assign c_ready[P] = o_ready;
  assign o_m        = c_m[P];

  a_rows_range: assert property (@(posedge clk) disable iff (!rst_n)
    (q_valid && q_ready) |-> (rows <= (AW+1)'(ROWS)));
endmodule
