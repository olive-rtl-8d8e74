// tb_ovp_decoder8 -- check of the 8-bit OVP decoder: every combination of a
// set of interesting bytes (identifier, zero, int8 extremes, abfloat codes)
// plus random pairs, compared with the pair definition.
module tb_ovp_decoder8;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic [15:0] pair_in;
  logic [3:0]  bias;
  exp_int8_t [1:0] pairs;
  int checks = 0, failures = 0;
  logic [7:0] pick[10] = '{8'h80, 8'h00, 8'h7f, 8'h81, 8'h01, 8'hff, 8'h3a, 8'hc5, 8'h08, 8'h5f};

  ovp_decoder8 dut (.pair_in, .bias, .pairs);

  task automatic check(input int b);
    #1;
    // an outlier whose exponent leaves the 4-bit field is outside the format
    if ((pair_in[7:0] == 8'h80 && int'(pair_in[14:11]) + b > 15) ||
        (pair_in[15:8] == 8'h80 && int'(pair_in[6:3]) + b > 15)) return;
    for (int k = 0; k < 2; k++) begin
      longint got = longint'(pairs[k].int_v) <<< pairs[k].exp_v;
      longint ev  = ovp8_val(pair_in, b, k);
      checks++;
      if (got != ev) begin
        failures++;
        if (failures < 10) $display("FAIL pair=%h bias=%0d idx=%0d got=%0d exp=%0d", pair_in, b, k, got, ev);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b <= 4; b++) begin
      bias = 4'(b);
      foreach (pick[i]) foreach (pick[j]) begin
        pair_in = {pick[j], pick[i]};
        check(b);
      end
      for (int r = 0; r < 500; r++) begin
        pair_in = 16'($urandom);
        // keep abfloat exponents inside the 4-bit field
        if (pair_in[7:0] == 8'h80) pair_in[14] = 1'b0;
        if (pair_in[15:8] == 8'h80) pair_in[6] = 1'b0;
        check(b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
