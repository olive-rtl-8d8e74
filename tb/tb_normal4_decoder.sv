// tb_normal4_decoder -- exhaustive check of the int4/flint4 normal decoder
// against the value lists of the two types. int4 must also give exponent 0.
module tb_normal4_decoder;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic [3:0] code;
  ntype_e     ntype;
  exp_int4_t  pair;
  int checks = 0, failures = 0;

  normal4_decoder dut (.code, .ntype, .pair);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2; t++) begin
      for (int c = 0; c < 16; c++) begin
        longint got;
        code = 4'(c); ntype = ntype_e'(t);
        #1;
        got = longint'(pair.int_v) <<< pair.exp_v;
        checks++;
        if (got != norm4_val(code, t[0])) begin
          failures++;
          $display("FAIL type=%0d code=%b value=%0d expected=%0d", t, code, got, norm4_val(code, t[0]));
        end
        if (t == 0) begin
          checks++;
          if (pair.exp_v != 0) begin
            failures++;
            $display("FAIL int4 exponent not zero");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
