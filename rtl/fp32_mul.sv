// fp32_mul: combinational IEEE binary32 multiplier.
//
// Multiplies the two 24-bit significands, normalises the 48-bit product by at
// most one position and rounds to nearest, ties to even. Subnormal inputs are
// read as zero and results below the normal range are flushed to zero; the
// IF4 datapath never produces subnormals (its smallest non-zero magnitude is
// about 2^-21). Overflow gives infinity; NaN inputs and inf x 0 give a quiet
// NaN. Rounding and subnormal handling are this design's choices: the IF4
// datapath only states that these multiplies are done in FP32.
module fp32_mul
  import if4_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] ma, mb;
  logic [47:0] prod;
  logic [22:0] mant;
  logic        g, st;
  logic signed [10:0] ey;
  logic [23:0] mant_r;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = a[22:0];
    sb = b[31]; eb = b[30:23]; mb = b[22:0];
    sy = sa ^ sb;
    a_zero = (ea == 8'd0);  b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (ma == 23'd0);
    b_inf  = (eb == 8'hFF) && (mb == 23'd0);
    a_nan  = (ea == 8'hFF) && (ma != 23'd0);
    b_nan  = (eb == 8'hFF) && (mb != 23'd0);

    prod = {24'd0, 1'b1, ma} * {24'd0, 1'b1, mb};
    ey   = 11'(ea) + 11'(eb) - 11'sd127;
    if (prod[47]) begin
      mant = prod[46:24]; g = prod[23]; st = |prod[22:0];
      ey   = ey + 11'sd1;
    end else begin
      mant = prod[45:23]; g = prod[22]; st = |prod[21:0];
    end
    mant_r = {1'b0, mant} + 24'(g && (st || mant[0]));
    if (mant_r[23]) ey = ey + 11'sd1;   // rounding carried out: mantissa is 0

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) y = FP32_QNAN;
    else if (a_inf || b_inf)                                      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)                                    y = {sy, 31'd0};
    else if (ey >= 11'sd255)                                      y = {sy, 8'hFF, 23'd0};
    else if (ey <= 11'sd0)                                        y = {sy, 31'd0};
    else                                                          y = {sy, ey[7:0], mant_r[22:0]};
  end
endmodule
