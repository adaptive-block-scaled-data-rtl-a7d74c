// tb_final_adder: checks the 16-input FP32 summation tree against the same
// pairwise order computed in double precision, on random inputs with mixed
// signs and exponents, on exact cancellation, and on the N=5 (odd) shape.
module tb_final_adder;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  fp32_t x [16];
  fp32_t sum;
  fp32_t x5 [5];
  fp32_t sum5;
  int checks = 0, failures = 0;

  final_adder #(.N(16)) dut   (.x(x),  .sum(sum));
  final_adder #(.N(5))  dut5  (.x(x5), .sum(sum5));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v [];
    logic [31:0] v5 [];
    v = new[16];
    v5 = new[5];
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 16; i++) begin
        x[i] = {1'($urandom), 8'($urandom_range(100, 150)), 23'($urandom)};
        if (t % 7 == 0 && i % 2 == 1) x[i] = {~x[i-1][31], x[i-1][30:0]};  // cancels
        v[i] = x[i];
      end
      for (int i = 0; i < 5; i++) begin x5[i] = x[i]; v5[i] = x[i]; end
      #1;
      checks += 2;
      if (!same(sum, tree_sum(v, 16))) begin
        failures++; $display("FAIL t=%0d got=%h exp=%h", t, sum, tree_sum(v, 16));
      end
      if (!same(sum5, tree_sum(v5, 5))) begin
        failures++; $display("FAIL5 t=%0d got=%h exp=%h", t, sum5, tree_sum(v5, 5));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
