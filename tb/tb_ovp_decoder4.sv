// tb_ovp_decoder4 -- exhaustive check of the 4-bit OVP decoder: every byte,
// both normal types, biases 0..4. Each output pair's value int << exp is
// compared with the pair definition: a 1000 half is a victim (zero), its
// partner is an E2M1 abfloat outlier, otherwise both halves are normals.
// Counts left-outlier (O-V) and right-outlier (V-O) pairs seen.
module tb_ovp_decoder4;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic [7:0] byte_in;
  ntype_e     ntype;
  logic [3:0] bias;
  exp_int4_t [1:0] pairs;
  int checks = 0, failures = 0, n_left = 0, n_right = 0;

  ovp_decoder4 dut (.byte_in, .ntype, .bias, .pairs);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2; t++)
      for (int b = 0; b <= 4; b++)
        for (int x = 0; x < 256; x++) begin
          byte_in = 8'(x); ntype = ntype_e'(t); bias = 4'(b);
          #1;
          for (int k = 0; k < 2; k++) begin
            longint got, exp_v;
            got = longint'(pairs[k].int_v) <<< pairs[k].exp_v;
            exp_v = ovp4_val(byte_in, t[0], b, k);
            checks++;
            if (got != exp_v) begin
              failures++;
              if (failures < 10) $display("FAIL byte=%h type=%0d bias=%0d idx=%0d got=%0d exp=%0d", byte_in, t, b, k, got, exp_v);
            end
          end
          if (byte_in[7:4] == 4'h8 && byte_in[3:0] != 4'h8) n_left++;
          if (byte_in[3:0] == 4'h8 && byte_in[7:4] != 4'h8) n_right++;
        end
    checks++;
    if (n_left == 0 || n_right == 0) failures++;
    $display("left-outlier pairs %0d, right-outlier pairs %0d", n_left, n_right);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
