// tb_bf16_sub -- self-checking test of the BF16 subtractor: random operands
// over a wide exponent range and a set of corner cases, checked bit-exactly
// against a real-arithmetic reference rounded to nearest-even BF16.
module tb_bf16_sub;
  import hfa_tb_pkg::*;
  logic [15:0] a, b, y, r;
  int checks = 0, failures = 0;
  bf16_sub dut (.a(a), .b(b), .y(y));

  task automatic check();
    #1;
    r = r2bf(bf2r(a) - bf2r(b));
    if (r[14:0] == 15'd0) r = {y[15], 15'd0};  // sign of a zero result is free
    checks++;
    if (y !== r) begin
      failures++;
      if (failures < 10) $display("FAIL %h - %h = %h expected %h", a, b, y, r);
    end
  endtask

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    a = 16'h3F80; b = 16'h3F80; check();        // 1 - 1
    a = 16'h4040; b = 16'h3F80; check();        // 3 - 1
    a = 16'h3F80; b = 16'h4040; check();        // 1 - 3
    a = 16'hFF7F; b = 16'h4040; check();        // -max - 3
    a = 16'h0000; b = 16'h3FC0; check();        // 0 - 1.5
    a = 16'h3F81; b = 16'h3F80; check();        // cancellation
    a = 16'h3F80; b = 16'h3B80; check();        // 1 - 2^-8: rounding tie
    for (int i = 0; i < 20000; i++) begin
      a = rand_bf(-20, 20, 1);
      b = rand_bf(-20, 20, 1);
      if (i % 4 == 0) b = {~a[15], a[14:0]} ^ 16'(int'($urandom_range(3)));
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
