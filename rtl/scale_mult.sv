// scale_mult: multiplies the weight and activation E4M3 scale factors into
// one FP32 unified scale factor.
//
// Bit 7 of each scale factor is the IF4 format indicator, not a sign, so only
// the seven magnitude bits are used. Each magnitude is read as a 4-bit
// integer significand (8 + m for normal numbers, m for subnormals) times a
// power of two (2^(e-10), or 2^-9 when e = 0). The 8-bit product of the two
// significands is normalised into FP32 exactly, so no rounding is needed.
// E4M3 code 1111.111 is NaN and yields a quiet NaN. Multiplying the scales on
// their own path, once per block, follows the IF4 MAC design.
//
// Interface: sw, sa in, s_fp32 out (their indicator bits are not read here;
// they go to int4_align). Combinational.
module scale_mult
  import if4_pkg::*;
(
  input  if4_scale_t sw,
  input  if4_scale_t sa,
  output fp32_t      s_fp32
);
  logic [3:0]        sig_w, sig_a;
  logic signed [5:0] pw_w, pw_a;
  logic [7:0]        sig;
  logic [2:0]        k;
  logic [22:0]       frac;
  logic [7:0]        e;

  always_comb begin
    sig_w = (sw.exp == 4'd0) ? {1'b0, sw.man} : {1'b1, sw.man};
    sig_a = (sa.exp == 4'd0) ? {1'b0, sa.man} : {1'b1, sa.man};
    pw_w  = (sw.exp == 4'd0) ? -6'sd9 : 6'(sw.exp) - 6'sd10;
    pw_a  = (sa.exp == 4'd0) ? -6'sd9 : 6'(sa.exp) - 6'sd10;
    sig   = 8'(sig_w) * 8'(sig_a);
    k     = 3'd0;
    for (int i = 0; i < 8; i++)
      if (sig[i]) k = 3'(i);
    e     = 8'(9'(pw_w) + 9'(pw_a) + 9'(k) + 9'sd127);   // always 109..150
    frac  = 23'(31'(sig) << (5'd23 - 5'(k)));        // bits below the leading one
    if ({sw.exp, sw.man} == 7'h7F || {sa.exp, sa.man} == 7'h7F) s_fp32 = FP32_QNAN;
    else if (sig == 8'd0) s_fp32 = FP32_ZERO;
    else                  s_fp32 = {1'b0, e, frac};
  end
endmodule
