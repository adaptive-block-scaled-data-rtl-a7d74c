// tb_if4_mac: end-to-end test of the IF4 MAC at its default size (16 lanes).
//
// 1. The worked example of the format: the group [6, 18, 36, 42] stored as
//    INT4 codes [1, 3, 6, 7] with scale 7.0 and the INT4 indicator set,
//    against activations of FP4 1.0 with scale 1.0, must give 102.
// 2. Latency: after a clear, one block is presented alone; the result must
//    still be 0 after the first clock edge and hold the block after the
//    second (two cycles, as in the published 500 MHz / 4.00 ns MAC).
// 3. A long random stream: one block per cycle with random gaps, clears,
//    codes, scale factors and format indicators. Each cycle the result is
//    compared bit for bit with a model that rounds every FP32 operation the
//    way the datapath is specified to, and with the exact real-valued sum of
//    dequantised products to a relative tolerance.
// Each mechanism (FP4 x FP4 pass-through, one-INT4 6/7 alignment, both-INT4
// 36/49 alignment, clear with and without a block, back-to-back blocks,
// idle cycles, negative results) is counted; one that never happens fails.
module tb_if4_mac;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  localparam int BS = 16;

  logic                  clk = 0, rst_n = 0, in_valid = 0, in_clr = 0;
  logic [BS-1:0][3:0]    w_codes = '0, a_codes = '0;
  if4_scale_t            w_scale = '0, a_scale = '0;
  logic                  out_valid;
  fp32_t                 result;

  if4_mac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pass = 0, n_67 = 0, n_3649 = 0, n_clr_blk = 0, n_clr_only = 0;
  int n_b2b = 0, n_idle = 0, n_neg = 0;

  // model state
  logic [31:0] acc_m [];
  real         p1 [BS];           // stage-1 element products
  logic [31:0] s1_scale;
  logic        s1_v = 0, s1_c = 0, ov_m = 0;
  real         ideal = 0.0, ideal_abs = 0.0;   // since the last clear
  real         ideal1 = 0.0, ideal_abs1 = 0.0; // block waiting in stage 1

  task automatic drive_block(input logic v, input logic c);
    real blk, blk_abs, k;
    in_valid = v; in_clr = c;
    k = f2r(r2f(e4m3_real(w_scale) * e4m3_real(a_scale))) *
        ((w_scale.ind ? 6.0 / 7.0 : 1.0) * (a_scale.ind ? 6.0 / 7.0 : 1.0));
    blk = 0.0; blk_abs = 0.0;
    for (int i = 0; i < BS; i++) begin
      real p;
      p = elem_real(w_codes[i], w_scale.ind) * elem_real(a_codes[i], a_scale.ind);
      blk += p * k;
      blk_abs += (p < 0 ? -p : p) * k;
    end
    ideal1 = blk; ideal_abs1 = blk_abs;
  endtask

  // model of one clock edge
  task automatic model_edge();
    logic [31:0] y;
    if (s1_v) begin
      for (int i = 0; i < BS; i++) begin
        y = fmul(r2f(p1[i]), s1_scale);
        acc_m[i] = fadd(s1_c ? 32'd0 : acc_m[i], y);
      end
    end else if (s1_c) begin
      for (int i = 0; i < BS; i++) acc_m[i] = 32'd0;
    end
    ov_m = s1_v;
    s1_v = in_valid;
    s1_c = in_clr;
    if (in_valid) begin
      for (int i = 0; i < BS; i++)
        p1[i] = elem_real(w_codes[i], w_scale.ind) * elem_real(a_codes[i], a_scale.ind);
      s1_scale = fmul(r2f(e4m3_real(w_scale) * e4m3_real(a_scale)),
                      align_const(w_scale.ind, a_scale.ind));
    end
  endtask

  // ideal (real-valued) sum tracking, lagging the model by the pipeline
  real id_pipe_v [1], id_pipe_abs [1];
  logic id_pipe_valid [1], id_pipe_clr [1];

  task automatic ideal_edge();
    if (id_pipe_clr[0]) begin ideal = 0.0; ideal_abs = 0.0; end
    if (id_pipe_valid[0]) begin ideal += id_pipe_v[0]; ideal_abs += id_pipe_abs[0]; end
    id_pipe_v[0] = ideal1; id_pipe_abs[0] = ideal_abs1;
    id_pipe_valid[0] = in_valid; id_pipe_clr[0] = in_clr;
  endtask

  task automatic clock_and_check(input string tag);
    @(posedge clk);
    model_edge();
    ideal_edge();
    #1;
    checks++;
    if (!same(result, tree_sum(acc_m, BS)) || out_valid != ov_m) begin
      failures++;
      $display("FAIL %s got=%h exp=%h ov=%0d/%0d", tag, result, tree_sum(acc_m, BS), out_valid, ov_m);
    end
    checks++;
    if ((f2r(result) - ideal > 1e-5 * ideal_abs + 1e-30) ||
        (ideal - f2r(result) > 1e-5 * ideal_abs + 1e-30)) begin
      failures++;
      $display("FAIL %s ideal=%f got=%f", tag, ideal, f2r(result));
    end
    if (f2r(result) < 0.0) n_neg++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_m = new[BS];
    for (int i = 0; i < BS; i++) begin acc_m[i] = 32'd0; p1[i] = 0.0; end
    for (int i = 0; i < 1; i++) begin
      id_pipe_v[i] = 0.0; id_pipe_abs[i] = 0.0; id_pipe_valid[i] = 0; id_pipe_clr[i] = 0;
    end
    s1_scale = 32'd0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- 1 + 2: worked example and latency -------------------------------
    @(negedge clk);
    w_codes = '0; a_codes = '0;
    w_codes[0] = 4'd1; w_codes[1] = 4'd3; w_codes[2] = 4'd6; w_codes[3] = 4'd7;
    for (int i = 0; i < BS; i++) a_codes[i] = 4'b0010;       // FP4 1.0
    w_scale = 8'b1_1001_110;                                  // INT4, 7.0
    a_scale = 8'b0_0111_000;                                  // FP4, 1.0
    drive_block(1, 1);
    n_67++; n_clr_blk++;
    clock_and_check("ex-edge1");
    checks++;
    if (result != 32'd0 || out_valid) begin failures++; $display("FAIL latency: early result"); end
    @(negedge clk);
    drive_block(0, 0);
    clock_and_check("ex-edge2");
    checks++;
    if (f2r(result) < 101.999 || f2r(result) > 102.001 || !out_valid) begin
      failures++; $display("FAIL example: got %f (expected 102)", f2r(result));
    end else $display("worked example: %f after 2 cycles", f2r(result));

    // ---- 3: random stream ----------------------------------------------
    for (int t = 0; t < 3000; t++) begin
      logic v, c;
      @(negedge clk);
      v = ($urandom_range(0, 5) != 0);
      c = ($urandom_range(0, 24) == 0);
      for (int i = 0; i < BS; i++) begin
        w_codes[i] = 4'($urandom);
        a_codes[i] = 4'($urandom);
      end
      w_scale = {1'($urandom), 4'($urandom_range(1, 14)), 3'($urandom)};
      a_scale = {1'($urandom), 4'($urandom_range(0, 14)), 3'($urandom)};
      if (v) begin
        if (in_valid) n_b2b++;
        case ({w_scale.ind, a_scale.ind})
          2'b00:        n_pass++;
          2'b11:        n_3649++;
          default:      n_67++;
        endcase
        if (c) n_clr_blk++;
      end else begin
        n_idle++;
        if (c) n_clr_only++;
      end
      drive_block(v, c);
      clock_and_check($sformatf("t=%0d", t));
    end
    @(negedge clk);
    drive_block(0, 0);
    repeat (3) clock_and_check("drain");

    $display("mechanisms: pass=%0d x6/7=%0d x36/49=%0d clr+blk=%0d clr-only=%0d back-to-back=%0d idle=%0d negative=%0d",
             n_pass, n_67, n_3649, n_clr_blk, n_clr_only, n_b2b, n_idle, n_neg);
    if (n_pass == 0 || n_67 == 0 || n_3649 == 0 || n_clr_blk == 0 || n_clr_only == 0 ||
        n_b2b == 0 || n_idle == 0 || n_neg == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
