// tb_abfloat4_decoder -- exhaustive check of the E2M1 abfloat decoder.
// For every code and biases 0..6 it compares int << exp with the value table
// of the format and checks the exponent formula exponent = bias + b2b1 and
// the paper's worked example (bias 2, code 0101 -> 48).
module tb_abfloat4_decoder;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic [3:0] code, bias;
  exp_int4_t  pair;
  int checks = 0, failures = 0;

  abfloat4_decoder dut (.code, .bias, .pair);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b <= 6; b++) begin
      for (int c = 0; c < 16; c++) begin
        longint got;
        code = 4'(c); bias = 4'(b);
        #1;
        got = longint'(pair.int_v) <<< pair.exp_v;
        checks++;
        if (got != abf4_val(code, b)) begin
          failures++;
          $display("FAIL code=%b bias=%0d value=%0d expected=%0d", code, b, got, abf4_val(code, b));
        end
        checks++;
        if (code[2:0] != 0 && pair.exp_v != 4'(b + code[2:1])) begin
          failures++;
          $display("FAIL exponent code=%b bias=%0d exp=%0d", code, b, pair.exp_v);
        end
      end
    end
    code = 4'b0101; bias = 4'd2; #1;
    checks++;
    if ((longint'(pair.int_v) <<< pair.exp_v) != 48) begin
      failures++;
      $display("FAIL worked example");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
