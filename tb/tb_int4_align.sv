// tb_int4_align: checks the range-alignment stage on random scale values for
// all four indicator combinations: pass, x6/7, x6/7, x36/49 (FP32, rounded to
// nearest even), against a double-precision reference.
module tb_int4_align;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  fp32_t s_in, s_out, expv;
  logic  iw, ia;
  int checks = 0, failures = 0;

  int4_align dut (.s_in(s_in), .ind_w(iw), .ind_a(ia), .s_out(s_out));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      // positive normal FP32 values across the scale-product range
      s_in = {1'b0, 8'(100 + $urandom_range(0, 40)), 23'($urandom)};
      {iw, ia} = 2'(t);
      #1;
      expv = fmul(s_in, align_const(iw, ia));
      checks++;
      if (!same(s_out, expv)) begin
        failures++;
        $display("FAIL s=%h iw=%0d ia=%0d got=%h exp=%h", s_in, iw, ia, s_out, expv);
      end
    end
    // 7 x 6/7 should come out as 6 (to within one ulp)
    s_in = 32'h40E0_0000; iw = 1; ia = 0;
    #1;
    checks++;
    if (f2r(s_out) < 5.9999 || f2r(s_out) > 6.0001) begin
      failures++; $display("FAIL 7*6/7 = %f", f2r(s_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
