// if4_pkg: types and constants shared by the IF4 multiply-accumulate datapath.
//
// IF4 stores a block of 16 four-bit values with one 8-bit scale factor. The
// scale factor is an E4M3 number whose sign bit is unused by the magnitude and
// is repurposed as the block's format indicator: 0 = the 16 values are FP4
// (E2M1), 1 = they are INT4 scaled by 6/7. Bit layout of a scale factor:
// [7] indicator, [6:3] exponent (bias 7), [2:0] significand.
//
// Decoded elements are signed Q4.1 fixed point (5 bits, two's complement,
// value = raw / 2), wide enough for both the FP4 set +-{0,.5,1,1.5,2,3,4,6}
// and the INT4 set -7..7. Wide arithmetic is IEEE binary32 (FP32) and the
// element products are IEEE binary16 (FP16).
//
// The FP32 constants 6/7 and 36/49 are those ratios rounded to nearest even;
// the ratios are the format's, the rounding is this design's choice.
package if4_pkg;

  typedef logic [31:0]       fp32_t;
  typedef logic [15:0]       fp16_t;
  typedef logic signed [4:0] q41_t;   // decoded element, value = raw / 2

  typedef struct packed {
    logic       ind;   // 1 = block stored as scaled INT4, 0 = FP4
    logic [3:0] exp;   // E4M3 exponent, bias 7
    logic [2:0] man;   // E4M3 significand
  } if4_scale_t;

  localparam fp32_t FP32_ZERO  = 32'h0000_0000;
  localparam fp32_t FP32_QNAN  = 32'h7FC0_0000;
  localparam fp32_t FP32_6_7   = 32'h3F5B_6DB7;  // 6/7   rounded to FP32
  localparam fp32_t FP32_36_49 = 32'h3F3C_14E6;  // 36/49 rounded to FP32

  // Exact widening of an FP16 value to FP32. FP16 subnormals cannot occur
  // in this datapath (the smallest non-zero product is 0.25) and are read as
  // zero.
  function automatic fp32_t fp16_to_fp32(input fp16_t h);
    logic [4:0] e;
    e = h[14:10];
    if (e == 5'd0)       return {h[15], 31'd0};
    else if (e == 5'd31) return {h[15], 8'hFF, h[9:0], 13'd0};
    else                 return {h[15], 8'(e) + 8'd112, h[9:0], 13'd0};
  endfunction

endpackage
