// tb_scale_mult: exhaustive check of the E4M3 x E4M3 -> FP32 scale multiplier.
// All pairs of scale-factor magnitudes, with random indicator bits, are
// compared with the exact product of their E4M3 values; NaN codes must give
// NaN. The example scale 0 1011 110 (= 28) is checked on its own.
module tb_scale_mult;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  if4_scale_t sw, sa;
  fp32_t      s;
  int checks = 0, failures = 0;

  scale_mult dut (.sw(sw), .sa(sa), .s_fp32(s));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sw = 8'b0_1011_110; sa = 8'b1_0111_000;   // 28 x 1
    #1;
    checks++;
    if (s != 32'h41E0_0000) begin failures++; $display("FAIL 28x1 got %h", s); end

    for (int i = 0; i < 128; i++)
      for (int j = 0; j < 128; j++) begin
        sw = {1'($urandom), 7'(i)};
        sa = {1'($urandom), 7'(j)};
        #1;
        checks++;
        if (i == 127 || j == 127) begin
          if (!(s[30:23] == 8'hFF && s[22:0] != 0)) begin
            failures++; $display("FAIL NaN %h %h got %h", sw, sa, s);
          end
        end else if (!same(s, r2f(e4m3_real(sw) * e4m3_real(sa)))) begin
          failures++;
          $display("FAIL %h x %h got %h exp %h", sw, sa, s, r2f(e4m3_real(sw) * e4m3_real(sa)));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
