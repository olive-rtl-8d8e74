// tb_abfloat8_decoder -- exhaustive check of the E4M3 abfloat decoder for
// biases 0..4 against the format definition (1mmm << (bias + e)), limited to
// codes whose exponent fits the 4-bit field (bias + e <= 15).
module tb_abfloat8_decoder;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic [7:0] code;
  logic [3:0] bias;
  exp_int8_t  pair;
  int checks = 0, failures = 0;

  abfloat8_decoder dut (.code, .bias, .pair);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b <= 4; b++)
      for (int c = 0; c < 256; c++) begin
        code = 8'(c); bias = 4'(b);
        #1;
        if (b + code[6:3] <= 15) begin
          longint got;
          got = longint'(pair.int_v) <<< pair.exp_v;
          checks++;
          if (got != abf8_val(code, b)) begin
            failures++;
            if (failures < 10) $display("FAIL code=%h bias=%0d got=%0d exp=%0d", code, b, got, abf8_val(code, b));
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
