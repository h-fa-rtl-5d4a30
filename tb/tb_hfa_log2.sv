// tb_hfa_log2 -- exhaustive test of the BF16 -> log-domain converter: every
// normal BF16 pattern is checked against log2|x| computed in real arithmetic
// (Mitchell error bound 0.0861 plus 1/128 quantisation), the sign, and the
// exact code (E-127)*128 + M.
module tb_hfa_log2;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  bf16_t x;
  logic  s;
  lns_t  lg;
  int checks = 0, failures = 0;
  real err;
  hfa_log2 dut (.x(x), .s(s), .lg(lg));

  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      x = 16'(i);
      #1;
      if (x[14:7] == 8'd0 || x[14:7] == 8'hFF) continue;
      checks++;
      err = absr(real'(lg) / 128.0 - log2r(absr(bf2r(x))));
      if (err > 0.0861 + 1.0 / 128.0 || s !== x[15] ||
          int'(lg) != (int'(x[14:7]) - 127) * 128 + int'(x[6:0])) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h lg=%0d s=%b err=%f", x, lg, s, err);
      end
    end
    x = 16'h0000; #1; checks++;
    if (lg !== -16'sd16256) failures++;             // zero maps to -127.0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
