// tb_hfa_logdiv -- checks the log-domain division and conversion to BF16.
// For random log2|o_j| and log2|l| the output must be the BF16 number with
// exponent floor(L)+127 and mantissa frac(L) (L = difference), must lie
// within the inverse-Mitchell bound (6.2 %) of 2^L, and must carry the XOR
// of the two signs.  Zero code, underflow and overflow are checked too.
module tb_hfa_logdiv;
  import hfa_pkg::*;
  import hfa_tb_pkg::*;
  localparam int D = 4;
  logic [D:0]    sgn;
  lns_t [D:0]    lg;
  bf16_t [D-1:0] attn;
  int checks = 0, failures = 0;
  hfa_logdiv #(.D(D)) dut (.sgn(sgn), .lg(lg), .attn(attn));

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int L, e;
    real ref_v, got;
    for (int n = 0; n < 5000; n++) begin
      sgn = (D+1)'($urandom);
      for (int j = 0; j <= D; j++) lg[j] = lns_t'($signed(int'($urandom_range(12000)) - 6000));
      #1;
      for (int j = 0; j < D; j++) begin
        L = int'(lg[j+1]) - int'(lg[0]);
        e = ((L >= 0) ? L / 128 : -((-L + 127) / 128)) + 127;
        ref_v = 2.0 ** (real'(L) / 128.0);
        got = absr(bf2r(attn[j]));
        checks++;
        if (attn[j][15] !== (sgn[j+1] ^ sgn[0]) || attn[j][14:7] != 8'(e) ||
            attn[j][6:0] != 7'(L & 127) || absr(got - ref_v) > 0.062 * ref_v) begin
          failures++;
          if (failures < 10) $display("FAIL L=%0d attn=%h ref=%f", L, attn[j], ref_v);
        end
      end
    end
    sgn = '0;
    lg[0] = '0; lg[1] = LNS_MIN; lg[2] = -16'sd20000; lg[3] = 16'sd20000; lg[4] = 16'sd128;
    lg[0] = -16'sd16000;
    #1;
    checks++; if (attn[0] !== 16'h0000) failures++;          // zero code
    checks++; if (attn[2] !== BF16_POS_MAX) failures++;      // overflow saturates
    lg[0] = 16'sd16000; #1;
    checks++; if (attn[1] !== 16'h0000) failures++;          // underflow flushes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
