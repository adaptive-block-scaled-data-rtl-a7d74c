// tb_if4_decoder: exhaustive check of the IF4 element decoder.
// All 16 codes are decoded as FP4 (E2M1) and as INT4 and compared with values
// computed from the format definitions.
module tb_if4_decoder;
  import if4_pkg::*;
  import tb_fp_pkg::*;

  logic [3:0] code;
  logic       is_int;
  q41_t       value;
  int checks = 0, failures = 0;

  if4_decoder dut (.code(code), .is_int(is_int), .value(value));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int c = 0; c < 16; c++) begin
        code = 4'(c); is_int = m[0];
        #1;
        checks++;
        if (real'(value) / 2.0 != elem_real(code, is_int)) begin
          failures++;
          $display("FAIL code=%h int=%0d got=%0d/2 exp=%f", code, is_int, value, elem_real(code, is_int));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
