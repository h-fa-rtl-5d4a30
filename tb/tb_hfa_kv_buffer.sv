// tb_hfa_kv_buffer -- writes random rows into a small KV buffer, reads them
// back in random order and checks the data, the one-cycle read latency and
// that the read port holds its value while re=0.
module tb_hfa_kv_buffer;
  import hfa_pkg::*;
  localparam int ROWS = 16, D = 4, AW = 4;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  bf16_t [D-1:0] wk, wv, rk, rv;
  bf16_t [D-1:0] mk [ROWS];
  bf16_t [D-1:0] mv [ROWS];
  int checks = 0, failures = 0;
  hfa_kv_buffer #(.ROWS(ROWS), .D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int r;
    for (int i = 0; i < ROWS; i++) begin
      we = 1; waddr = AW'(i);
      for (int j = 0; j < D; j++) begin wk[j] = 16'($urandom); wv[j] = 16'($urandom); end
      mk[i] = wk; mv[i] = wv;
      @(posedge clk); #1;
    end
    we = 0;
    for (int n = 0; n < 200; n++) begin
      r = int'($urandom_range(ROWS - 1));
      re = 1; raddr = AW'(r);
      @(posedge clk); #1;
      re = 0; raddr = AW'(r + 1);
      checks++;
      if (rk !== mk[r] || rv !== mv[r]) begin failures++; $display("FAIL row %0d", r); end
      @(posedge clk); #1;
      checks++;
      if (rk !== mk[r] || rv !== mv[r]) begin failures++; $display("FAIL hold row %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
