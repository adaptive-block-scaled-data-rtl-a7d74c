// product_mult: multiplies a decoded weight and activation and returns the
// exact product as an FP16 number.
//
// Both inputs are Q4.1, so their integer product P is the real product times
// 4 and has |P| <= 256. The magnitude is normalised by its leading one and
// packed into FP16 with exponent (msb position - 2 + 15); at most 9 significant
// bits are involved, so FP16's 11-bit significand holds every product exactly.
// The FP16 product format is the IF4 MAC's; doing it through an integer
// multiplier is this design's choice. A zero product is +0.
//
// Interface: w, a (Q4.1) in, p_fp16 out. Combinational.
module product_mult
  import if4_pkg::*;
(
  input  q41_t  w,
  input  q41_t  a,
  output fp16_t p_fp16
);
  logic signed [9:0] p;
  logic [8:0]        mag;
  logic [3:0]        k;
  logic [9:0]        frac;

  always_comb begin
    p   = 10'(w) * 10'(a);
    mag = p[9] ? 9'(-p) : 9'(p);
    k   = 4'd0;
    for (int i = 0; i < 9; i++)
      if (mag[i]) k = 4'(i);
    frac = 10'(18'(mag) << (4'd10 - k));     // bits below the leading one
    if (mag == 9'd0) p_fp16 = 16'h0000;
    else             p_fp16 = {p[9], 5'(k) + 5'd13, frac};
  end
endmodule
