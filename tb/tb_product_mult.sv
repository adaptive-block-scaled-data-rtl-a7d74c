// tb_product_mult: exhaustive check of the Q4.1 x Q4.1 -> FP16 product.
// Every pair of 5-bit Q4.1 inputs is multiplied; the FP16 result must equal
// the real product exactly and a non-zero result must be a normal FP16 number.
module tb_product_mult;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  q41_t  w, a;
  fp16_t p;
  int checks = 0, failures = 0;

  product_mult dut (.w(w), .a(a), .p_fp16(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -16; i < 16; i++)
      for (int j = -16; j < 16; j++) begin
        w = q41_t'(i); a = q41_t'(j);
        #1;
        checks++;
        if (h2r(p) != (real'(i) / 2.0) * (real'(j) / 2.0) ||
            (p[14:0] != 15'd0 && p[14:10] == 5'd0)) begin
          failures++;
          $display("FAIL w=%0d a=%0d got=%h", i, j, p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
