// tb_lane_accumulator: drives a random stream of FP32 addends with random
// enable and clear into the lane accumulator and checks its sum every cycle
// against a double-precision model that rounds each addition to FP32.
// Includes mixed signs (cancellation) and an asynchronous reset in the middle.
module tb_lane_accumulator;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  logic  clk = 0, rst_n = 0, clr = 0, en = 0;
  fp32_t y = '0, acc, model = '0;
  int checks = 0, failures = 0, n_clr = 0;

  lane_accumulator dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .y(y), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 9) != 0);
      clr = ($urandom_range(0, 29) == 0);
      y   = {1'($urandom), 8'($urandom_range(110, 140)), 23'($urandom)};
      if (t == 1500) begin
        rst_n = 0; #1; rst_n = 1; model = '0;
        checks++;
        if (acc != 32'd0) begin failures++; $display("FAIL async reset"); end
      end
      if (clr) n_clr++;
      @(posedge clk); #1;
      if (en)       model = fadd(clr ? 32'd0 : model, y);
      else if (clr) model = 32'd0;
      checks++;
      if (!same(acc, model)) begin
        failures++;
        $display("FAIL t=%0d got=%h exp=%h", t, acc, model);
      end
    end
    if (n_clr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
