// block_scaler: applies the block's unified, range-aligned FP32 scale to one
// FP16 element product, giving an FP32 scaled product.
//
// The FP16 product is widened to FP32 exactly and multiplied by the scale
// with an FP32 multiplier (round to nearest even). The FP16-by-FP32 scaling
// step is the IF4 MAC's; widening first is this design's choice.
//
// Interface: p_fp16, s_fp32 in, y_fp32 out. Combinational.
module block_scaler
  import if4_pkg::*;
(
  input  fp16_t p_fp16,
  input  fp32_t s_fp32,
  output fp32_t y_fp32
);
  fp32_t p32;
  assign p32 = fp16_to_fp32(p_fp16);
  fp32_mul u_mul (.a(p32), .b(s_fp32), .y(y_fp32));
endmodule
