// fp32_add: combinational IEEE binary32 adder.
//
// Orders the operands by magnitude, aligns the smaller significand with three
// extra bits (guard, round, sticky), adds or subtracts, renormalises with a
// leading-zero count and rounds to nearest, ties to even. Subnormal inputs are
// read as zero and results below the normal range are flushed to zero (the
// IF4 datapath never reaches them). An exact zero result is +0. Overflow gives
// infinity; NaN, or infinities of opposite sign, give a quiet NaN. Rounding and
// subnormal handling are this design's choices.
module fp32_add
  import if4_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       hi, lo;       // larger and smaller operand by magnitude
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [7:0]  d;
  logic [26:0] sig_hi, sig_lo, sh;
  logic        sticky;
  logic [27:0] sum;
  logic [26:0] n;
  logic signed [9:0] ey;
  logic [4:0]  lz;
  logic [23:0] mant_r;
  logic        sy;

  always_comb begin
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    a_inf  = (a[30:23] == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (b[30:23] == 8'hFF) && (b[22:0] == 23'd0);
    a_nan  = (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (b[30:23] == 8'hFF) && (b[22:0] != 23'd0);

    if (a[30:0] >= b[30:0]) begin hi = a; lo = b; end
    else                    begin hi = b; lo = a; end
    sy = hi[31];

    d         = hi[30:23] - lo[30:23];
    sig_hi   = {1'b1, hi[22:0], 3'b000};
    sig_lo = {1'b1, lo[22:0], 3'b000};
    if (d >= 8'd27) begin
      sh     = 27'd0;
      sticky = 1'b1;
    end else begin
      sh     = sig_lo >> d;
      sticky = ((sig_lo & ((27'd1 << d) - 27'd1)) != 27'd0);
    end
    sh[0] = sh[0] | sticky;

    ey = 10'(hi[30:23]);
    if (hi[31] == lo[31]) sum = {1'b0, sig_hi} + {1'b0, sh};
    else                      sum = {1'b0, sig_hi} - {1'b0, sh};

    if (sum[27]) begin
      n  = {sum[27:2], sum[1] | sum[0]};
      ey = ey + 10'sd1;
    end else begin
      n  = sum[26:0];
    end
    lz = 5'd27;                              // leading-zero count of n
    for (int i = 0; i < 27; i++)
      if (n[i]) lz = 5'(26 - i);
    if (lz != 5'd27) begin
      n  = n << lz;
      ey = ey - 10'(lz);
    end
    mant_r = {1'b0, n[25:3]} + 24'(n[2] && ((n[1] | n[0]) || n[3]));
    if (mant_r[23]) ey = ey + 10'sd1;

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]))) y = FP32_QNAN;
    else if (a_inf)                 y = a;
    else if (b_inf)                 y = b;
    else if (a_zero && b_zero)      y = {a[31] & b[31], 31'd0};
    else if (a_zero)                y = b;
    else if (b_zero)                y = a;
    else if (lz == 5'd27)           y = FP32_ZERO;           // exact cancellation
    else if (ey >= 10'sd255)        y = {sy, 8'hFF, 23'd0};
    else if (ey <= 10'sd0)          y = {sy, 31'd0};
    else                            y = {sy, ey[7:0], mant_r[22:0]};
  end
endmodule
