// if4_lane: one element lane of the IF4 MAC (the MAC holds BLOCK_SIZE of them).
//
// Stage 1 decodes the weight and activation codes with two if4_decoder units
// (each told by its block's indicator whether the code is FP4 or INT4),
// multiplies them into an FP16 product and registers it. Stage 2 multiplies
// the registered product by the block's aligned FP32 scale and adds the result
// to the lane's FP32 accumulator. The decoder / FP16 product / FP32 scaling /
// FP32 accumulation chain follows the IF4 MAC design; the placement of the
// single pipeline register is this design's choice, made so that a block is
// in the accumulator two cycles after it is presented (the published MAC has
// a latency of two 2 ns cycles).
//
// Interface: stage-1 inputs in_valid, w_code, a_code, ind_w, ind_a; stage-2
// controls s1_valid, s1_clr and scale, which the MAC registers once for all
// lanes alongside this lane's product register; output acc (FP32).
module if4_lane
  import if4_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [3:0] w_code,
  input  logic [3:0] a_code,
  input  logic       ind_w,
  input  logic       ind_a,
  input  logic       s1_valid,
  input  logic       s1_clr,
  input  fp32_t      scale,
  output fp32_t      acc
);
  q41_t  w_dec, a_dec;
  fp16_t p16, p16_q;
  fp32_t y;

  if4_decoder  u_dec_w (.code(w_code), .is_int(ind_w), .value(w_dec));
  if4_decoder  u_dec_a (.code(a_code), .is_int(ind_a), .value(a_dec));
  product_mult u_pmul  (.w(w_dec), .a(a_dec), .p_fp16(p16));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        p16_q <= '0;
    else if (in_valid) p16_q <= p16;

  block_scaler     u_scale (.p_fp16(p16_q), .s_fp32(scale), .y_fp32(y));
  lane_accumulator u_acc   (.clk(clk), .rst_n(rst_n), .clr(s1_clr), .en(s1_valid),
                            .y(y), .acc(acc));
endmodule
