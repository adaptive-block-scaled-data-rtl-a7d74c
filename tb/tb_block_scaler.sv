// tb_block_scaler: checks the FP16 x FP32 -> FP32 scaling multiply on random
// element products (every value a Q4.1 x Q4.1 product can take) and random
// positive scales, against a double-precision reference.
module tb_block_scaler;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  fp16_t p;
  fp32_t s, y, expv;
  int checks = 0, failures = 0;

  block_scaler dut (.p_fp16(p), .s_fp32(s), .y_fp32(y));

  function automatic fp16_t to_h(input int q);   // q / 4 as FP16 (|q| <= 256)
    int mag, k;
    logic [15:0] al;
    if (q == 0) return 16'h0000;
    mag = q < 0 ? -q : q;
    k = 0;
    while ((mag >> (k + 1)) != 0) k++;
    al = 16'(mag << (10 - k));
    return {q < 0, 5'(k + 13), al[9:0]};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int q;
      q = $urandom_range(0, 512) - 256;
      p = to_h(q);
      s = {1'b0, 8'($urandom_range(90, 160)), 23'($urandom)};
      #1;
      checks++;
      expv = r2f(real'(q) / 4.0 * f2r(s));
      if (h2r(p) != real'(q) / 4.0) begin failures++; $display("TB encode error %0d", q); end
      if (!same(y, expv)) begin
        failures++;
        $display("FAIL p=%h s=%h got=%h exp=%h", p, s, y, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
