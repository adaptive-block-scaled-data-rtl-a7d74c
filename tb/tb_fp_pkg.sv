// tb_fp_pkg: reference arithmetic for the IF4 MAC testbenches.
//
// Values are held as SystemVerilog reals (IEEE double). A product of two FP32
// numbers is exact in double and a sum of two is rounded at most once, far
// below FP32 precision, so rounding the double result to FP32 with
// round-to-nearest-even (r2f) reproduces a correctly rounded FP32 operation.
// Results below the FP32 normal range are flushed to zero, as in the RTL.
// The element and scale-factor decoders here are written from the format
// definitions (E2M1, INT4, E4M3), not from the RTL's tables.
package tb_fp_pkg;

  function automatic real pow2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real f2r(input logic [31:0] f);
    logic [7:0] e;
    real m, r;
    e = f[30:23];
    if (e == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    r = m * pow2(int'(e) - 127);
    return f[31] ? -r : r;
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [51:0] m52;
    logic [23:0] m;
    logic        g, st;
    if (r == 0.0) return 32'd0;
    d   = $realtobits(r);
    e   = int'(d[62:52]) - 1023 + 127;
    m52 = d[51:0];
    m   = {1'b0, m52[51:29]};
    g   = m52[28];
    st  = |m52[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin e = e + 1; m = 24'd0; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic real h2r(input logic [15:0] h);
    real r;
    if (h[14:10] == 5'd0) r = real'(h[9:0]) * pow2(-24);
    else r = (1.0 + real'(h[9:0]) / 1024.0) * pow2(int'(h[14:10]) - 15);
    return h[15] ? -r : r;
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // FP4 E2M1: bit 3 sign, bits 2:1 exponent (bias 1), bit 0 mantissa.
  function automatic real fp4_real(input logic [3:0] c);
    int  e;
    real r;
    e = int'(c[2:1]);
    if (e == 0) r = 0.5 * real'(c[0]);
    else        r = pow2(e - 1) * (1.0 + 0.5 * real'(c[0]));
    return c[3] ? -r : r;
  endfunction

  function automatic real int4_real(input logic [3:0] c);
    return real'($signed(c));
  endfunction

  function automatic real elem_real(input logic [3:0] c, input logic is_int);
    return is_int ? int4_real(c) : fp4_real(c);
  endfunction

  // Magnitude of an E4M3 scale factor (bit 7 ignored), bias 7.
  function automatic real e4m3_real(input logic [7:0] s);
    int e;
    e = int'(s[6:3]);
    if (e == 0) return real'(s[2:0]) / 8.0 * pow2(-6);
    return (1.0 + real'(s[2:0]) / 8.0) * pow2(e - 7);
  endfunction

  // FP32 value of the range-alignment factor for a pair of indicators.
  function automatic logic [31:0] align_const(input logic iw, input logic ia);
    if (iw && ia)      return r2f(36.0 / 49.0);
    else if (iw || ia) return r2f(6.0 / 7.0);
    return 32'h3F80_0000;
  endfunction

  // Pairwise tree sum of n FP32 values: node i of a level adds nodes 2i and
  // 2i+1 of the level below; an odd last node passes through.
  function automatic logic [31:0] tree_sum(input logic [31:0] v [], input int n);
    logic [31:0] cur [];
    int          m;
    cur = v;
    m   = n;
    while (m > 1) begin
      for (int i = 0; i < (m + 1) / 2; i++)
        cur[i] = (2 * i + 1 < m) ? fadd(cur[2*i], cur[2*i+1]) : cur[2*i];
      m = (m + 1) / 2;
    end
    return cur[0];
  endfunction

  // Equal as FP32 bit patterns, with +0 and -0 taken as equal.
  function automatic bit same(input logic [31:0] a, input logic [31:0] b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b1;
    return a == b;
  endfunction

endpackage
