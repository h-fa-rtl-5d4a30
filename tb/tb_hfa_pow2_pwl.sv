// tb_hfa_pow2_pwl -- exhaustive test of 2^-x: all 65536 input codes against
// 2^-x in real arithmetic.  Allowed error: 1.2/128 (PWL fit error below
// 0.0015 plus rounding to 7 fraction bits).  Also checks that 2^-0 = 1.0
// and that large x gives exactly 0.
module tb_hfa_pow2_pwl;
  import hfa_tb_pkg::*;
  logic [15:0] x;
  logic [7:0]  y;
  int checks = 0, failures = 0;
  real ref_v, err, worst = 0.0;
  hfa_pow2_pwl dut (.x(x), .y(y));

  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      x = 16'(i);
      #1;
      ref_v = 2.0 ** (-real'(i) / 128.0);
      err = absr(real'(y) / 128.0 - ref_v);
      if (err > worst) worst = err;
      checks++;
      if (err > 1.2 / 128.0) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d ref=%f", i, y, ref_v);
      end
    end
    x = 16'd0; #1; checks++; if (y != 8'd128) failures++;
    x = 16'd2000; #1; checks++; if (y != 8'd0) failures++;
    $display("worst error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
