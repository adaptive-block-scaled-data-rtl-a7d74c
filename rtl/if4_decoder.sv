// if4_decoder: turns one 4-bit IF4 element into a signed Q4.1 number.
//
// The block's indicator bit (the sign bit of its scale factor) selects the
// decoding. Indicator 0: the code is FP4 E2M1 (bit 3 sign, bits 2:0 magnitude)
// and the magnitude comes from an eight-entry lookup table, because the FP4
// values 0, .5, 1, 1.5, 2, 3, 4, 6 are not evenly spaced. Indicator 1: the code
// is a two's-complement INT4 and the Q4.1 word is the code shifted left by one.
// The table-versus-shifter split and the Q4.1 width follow the IF4 MAC design;
// the code layouts are the usual E2M1 and two's-complement ones. The INT4 code
// 1000 (-8) is never produced by an IF4 quantizer and decodes to -8.
//
// Interface: code and is_int in, value out (raw = 2 x value). Combinational.
module if4_decoder
  import if4_pkg::*;
(
  input  logic [3:0] code,
  input  logic       is_int,
  output q41_t       value
);
  logic [4:0] fp_mag;   // FP4 magnitude in units of 0.5

  always_comb begin
    unique case (code[2:0])
      3'd0: fp_mag = 5'd0;    // 0
      3'd1: fp_mag = 5'd1;    // 0.5
      3'd2: fp_mag = 5'd2;    // 1
      3'd3: fp_mag = 5'd3;    // 1.5
      3'd4: fp_mag = 5'd4;    // 2
      3'd5: fp_mag = 5'd6;    // 3
      3'd6: fp_mag = 5'd8;    // 4
      3'd7: fp_mag = 5'd12;   // 6
    endcase
    if (is_int) value = q41_t'({code, 1'b0});
    else        value = code[3] ? -q41_t'(fp_mag) : q41_t'(fp_mag);
  end
endmodule
