// hfa_kv_buffer -- on-chip key/value buffer of one KV sub-block.
//
// ROWS rows, each holding one key vector and one value vector of D BF16
// elements, written through a single write port and read one whole row at a
// time.  The read is synchronous: the row addressed while re=1 appears on
// rk/rv after the clock edge and stays there until the next read, like an
// SRAM macro's output latch.  The paper sizes this buffer (1024 rows split
// over four blocks of 256) but does not design it; it is written here as a
// plain array that synthesis maps to memory.
module hfa_kv_buffer
  import hfa_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned D    = 64,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  bf16_t [D-1:0] wk,
  input  bf16_t [D-1:0] wv,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output bf16_t [D-1:0] rk,
  output bf16_t [D-1:0] rv
);
  bf16_t [D-1:0] kmem [ROWS];
  bf16_t [D-1:0] vmem [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      kmem[waddr] <= wk;
      vmem[waddr] <= wv;
    end
  end

  always_ff @(posedge clk) begin
    if (re) begin
      rk <= kmem[raddr];
      rv <= vmem[raddr];
    end
  end
endmodule
