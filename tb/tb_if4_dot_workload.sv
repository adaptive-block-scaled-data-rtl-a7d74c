// tb_if4_dot_workload: runs whole dot products of the sizes used by the
// linear layers of a 340M-parameter transformer (hidden size 1024 and
// intermediate size 2816) through the IF4 MAC at its default size.
//
// The testbench generates weight and activation vectors in double precision,
// either roughly normal (sum of uniforms) or uniform (as after a Hadamard
// transform), and quantizes each group of 16 to IF4 with a behavioural
// quantizer:
//   delta = e4m3(max|x| / 6); xs = x / delta;
//   FP4 option:  e2m1(xs), dequantized as code * delta;
//   INT4 option: round(xs * 7/6) clipped to +-7, dequantized as code * delta * 6/7;
//   keep the INT4 option (indicator 1) only if its squared error is lower.
// The global FP32 tensor scale is left out: it is a per-tensor constant
// applied outside the MAC.
//
// Each dot product is streamed as K/16 back-to-back blocks, the first with
// in_clr. The result must equal the exact dot product of the dequantized
// vectors to a relative tolerance of 1e-5 of the sum of |terms|, and must
// arrive K/16 + 1 clock edges after the first block (one block per cycle,
// two-cycle latency). Both INT4 and FP4 blocks must be chosen at least once.
module tb_if4_dot_workload;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  localparam int BS = 16;

  logic               clk = 0, rst_n = 0, in_valid = 0, in_clr = 0;
  logic [BS-1:0][3:0] w_codes = '0, a_codes = '0;
  if4_scale_t         w_scale = '0, a_scale = '0;
  logic               out_valid;
  fp32_t              result;

  if4_mac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_int_blocks = 0, n_fp_blocks = 0;

  // ---- behavioural IF4 quantizer -------------------------------------------
  function automatic logic [6:0] e4m3_round(input real v);   // nearest, ties to even code
    logic [6:0] best;
    real        bd, d;
    best = 7'd0; bd = v;
    for (int c = 1; c < 127; c++) begin
      d = e4m3_real(8'(c)) - v;
      if (d < 0) d = -d;
      if (d < bd || (d == bd && c[0] == 1'b0)) begin bd = d; best = 7'(c); end
    end
    return best;
  endfunction

  function automatic logic [3:0] fp4_round(input real v);
    logic [3:0] best;
    real        bd, d;
    best = 4'd0; bd = 1.0e30;
    for (int c = 0; c < 16; c++) begin
      d = fp4_real(4'(c)) - v;
      if (d < 0) d = -d;
      if (d < bd || (d == bd && c[0] == 1'b0)) begin bd = d; best = 4'(c); end
    end
    return best;
  endfunction

  function automatic logic [3:0] int4_round(input real v);
    logic [3:0] best;
    real        bd, d;
    best = 4'd0; bd = 1.0e30;
    for (int c = -7; c <= 7; c++) begin
      d = real'(c) - v;
      if (d < 0) d = -d;
      if (d < bd || (d == bd && c[0] == 1'b0)) begin bd = d; best = 4'(c); end
    end
    return best;
  endfunction

  // Quantizes x[16] into codes and a scale factor (with indicator).
  task automatic quantize(input real x [BS], output logic [BS-1:0][3:0] codes,
                          output if4_scale_t sc);
    real mx, delta, e_fp, e_int, d;
    logic [6:0] dcode;
    logic [BS-1:0][3:0] c_fp, c_int;
    mx = 0.0;
    for (int i = 0; i < BS; i++) mx = (x[i] > mx) ? x[i] : ((-x[i] > mx) ? -x[i] : mx);
    dcode = e4m3_round(mx / 6.0);
    delta = e4m3_real({1'b0, dcode});
    e_fp = 0.0; e_int = 0.0;
    for (int i = 0; i < BS; i++) begin
      if (delta == 0.0) begin c_fp[i] = 4'd0; c_int[i] = 4'd0; continue; end
      c_fp[i]  = fp4_round(x[i] / delta);
      c_int[i] = int4_round(x[i] / delta * 7.0 / 6.0);
      d = fp4_real(c_fp[i]) * delta - x[i];                 e_fp  += d * d;
      d = int4_real(c_int[i]) * delta * 6.0 / 7.0 - x[i];   e_int += d * d;
    end
    if (e_int < e_fp) begin codes = c_int; sc = {1'b1, dcode}; n_int_blocks++; end
    else              begin codes = c_fp;  sc = {1'b0, dcode}; n_fp_blocks++;  end
  endtask

  function automatic real deq(input logic [3:0] c, input if4_scale_t s);
    return s.ind ? int4_real(c) * e4m3_real(s) * 6.0 / 7.0 : fp4_real(c) * e4m3_real(s);
  endfunction

  function automatic real sample(input bit gaussian, input real spread);
    real r;
    if (gaussian) begin
      r = 0.0;
      for (int k = 0; k < 12; k++) r += real'($urandom_range(0, 1000000)) / 1000000.0;
      return (r - 6.0) * spread;
    end
    return (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * spread;
  endfunction

  // ---- one dot product of length k -------------------------------------------
  task automatic run_dot(input int k, input bit gaussian);
    int  nb, first_edge, edges;
    real ref_dot, ref_abs, t;
    real xw [BS], xa [BS];
    logic [BS-1:0][3:0] wc, ac;
    if4_scale_t ws, as_;
    nb = k / BS;
    ref_dot = 0.0; ref_abs = 0.0;
    edges = 0;
    for (int b = 0; b < nb; b++) begin
      for (int i = 0; i < BS; i++) begin
        xw[i] = sample(gaussian, 0.02);
        xa[i] = sample(gaussian, 3.0);
      end
      quantize(xw, wc, ws);
      quantize(xa, ac, as_);
      for (int i = 0; i < BS; i++) begin
        t = deq(wc[i], ws) * deq(ac[i], as_);
        ref_dot += t;
        ref_abs += (t < 0) ? -t : t;
      end
      @(negedge clk);
      in_valid = 1; in_clr = (b == 0);
      w_codes = wc; a_codes = ac; w_scale = ws; a_scale = as_;
      @(posedge clk);
      edges++;
    end
    @(negedge clk);
    in_valid = 0; in_clr = 0;
    // wait for the last block's out_valid
    while (1) begin
      @(posedge clk); #1;
      edges++;
      if (out_valid) break;
      if (edges > nb + 10) break;
    end
    checks++;
    if (edges != nb + 1) begin
      failures++;
      $display("FAIL K=%0d: result after %0d edges, expected %0d", k, edges, nb + 1);
    end
    checks++;
    t = f2r(result) - ref_dot;
    if (t < 0) t = -t;
    if (t > 1e-5 * ref_abs + 1e-30) begin
      failures++;
      $display("FAIL K=%0d: result %f, exact %f", k, f2r(result), ref_dot);
    end else
      $display("K=%0d %s: result %f, exact dequantized dot %f, %0d blocks in %0d edges",
               k, gaussian ? "normal" : "uniform", f2r(result), ref_dot, nb, edges);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_dot(1024, 1'b1);
    run_dot(1024, 1'b0);
    run_dot(2816, 1'b1);
    run_dot(2816, 1'b0);
    $display("blocks quantized as INT4: %0d, as FP4: %0d", n_int_blocks, n_fp_blocks);
    checks++;
    if (n_int_blocks == 0 || n_fp_blocks == 0) begin
      failures++; $display("FAIL both formats must be selected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
