// int4_align: the IF4 range-alignment stage of the scale path.
//
// An INT4 block is stored scaled by 7/6 so that its largest code (7) covers
// the same range as FP4's largest value (6); the MAC undoes this once per
// block on the unified scale factor. With both indicators 0 the scale passes
// unchanged; with exactly one set it is multiplied by 6/7; with both set by
// 36/49 = (6/7)^2. The multiply is FP32. The three cases come from the IF4 MAC
// design; sharing one FP32 multiplier with a constant chosen by the
// indicators, and using 36/49 rounded once rather than 6/7 applied twice, are
// this design's choices.
//
// Interface: s_in (FP32), ind_w, ind_a in, s_out (FP32) out. Combinational.
module int4_align
  import if4_pkg::*;
#(
  parameter fp32_t C_6_7   = FP32_6_7,
  parameter fp32_t C_36_49 = FP32_36_49
) (
  input  fp32_t s_in,
  input  logic  ind_w,
  input  logic  ind_a,
  output fp32_t s_out
);
  fp32_t k, scaled;

  always_comb
    k = (ind_w && ind_a) ? C_36_49 : C_6_7;

  fp32_mul u_mul (.a(s_in), .b(k), .y(scaled));

  assign s_out = (ind_w || ind_a) ? scaled : s_in;
endmodule
