// tb_if4_lane: checks one IF4 element lane cycle by cycle.
// Random weight/activation codes and indicators enter stage 1 with a random
// valid; stage-2 controls follow one cycle later as the MAC would drive them,
// with a fresh random scale. The model decodes the codes from the format
// definitions, multiplies exactly, scales with one FP32 rounding and
// accumulates with one FP32 rounding per add. The product of a block must
// reach the accumulator on the second clock edge after it is presented.
module tb_if4_lane;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0, in_clr = 0, s1_valid = 0, s1_clr = 0;
  logic [3:0] w_code = 0, a_code = 0;
  logic       ind_w = 0, ind_a = 0;
  fp32_t      scale = '0, acc, model = '0;
  real        p_model = 0.0;
  int checks = 0, failures = 0, n_int = 0, n_fp = 0;

  if4_lane dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p_new;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      s1_valid = in_valid;
      s1_clr   = in_clr;
      scale    = {1'b0, 8'($urandom_range(110, 140)), 23'($urandom)};
      in_valid = ($urandom_range(0, 4) != 0);
      in_clr   = ($urandom_range(0, 19) == 0);
      w_code   = 4'($urandom); a_code = 4'($urandom);
      ind_w    = 1'($urandom); ind_a = 1'($urandom);
      if (ind_w || ind_a) n_int++; else n_fp++;
      p_new = elem_real(w_code, ind_w) * elem_real(a_code, ind_a);
      @(posedge clk); #1;
      if (s1_valid)    model = fadd(s1_clr ? 32'd0 : model, fmul(r2f(p_model), scale));
      else if (s1_clr) model = 32'd0;
      if (in_valid) p_model = p_new;
      checks++;
      if (!same(acc, model)) begin
        failures++;
        $display("FAIL t=%0d got=%h exp=%h", t, acc, model);
      end
    end
    if (n_int == 0 || n_fp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
