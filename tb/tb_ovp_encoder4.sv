// tb_ovp_encoder4 -- checks the 4-bit OVP encoder against a real-arithmetic
// model of the pair encoding and abfloat algorithms (olive_ref_pkg), for
// random values, fraction widths, thresholds, both normal types and several
// biases, plus the worked example 2.6, 4.2 -> int4 0011, 0100. Counts left
// outliers, right outliers and normal pairs; each must occur.
module tb_ovp_encoder4;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic signed [31:0] v1, v2;
  logic [4:0]  frac;
  logic [31:0] thr;
  ntype_e      ntype;
  logic [3:0]  bias;
  logic [7:0]  byte_out, expb;
  int checks = 0, failures = 0, n_left = 0, n_right = 0, n_norm = 0;

  ovp_encoder4 dut (.v1, .v2, .frac, .thr, .ntype, .bias, .byte_out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [31:0] rnd_val(input int f);
    int m;
    case ($urandom_range(0, 3))
      0: m = $urandom_range(0, 8 << f);          // normal range
      1: m = $urandom_range(0, 16 << f);
      2: m = $urandom_range(0, 200 << f);        // outliers
      default: m = $urandom_range(0, 2) << f;    // exact small values
    endcase
    return $urandom_range(0, 1) ? -m : m;
  endfunction

  initial begin
    // worked example: 2.6 and 4.2 with 4 fraction bits
    v1 = 32'sd42; v2 = 32'sd67; frac = 5'd4; thr = 32'd120; ntype = NT_INT4; bias = 4'd2;
    #1;
    checks++;
    if (byte_out != 8'b0100_0011) begin failures++; $display("FAIL example %b", byte_out); end
    for (int n = 0; n < 20000; n++) begin
      int f = $urandom_range(0, 8);
      frac  = 5'(f);
      ntype = ntype_e'($urandom_range(0, 1));
      bias  = 4'((ntype == NT_INT4) ? 2 : 3) - 4'($urandom_range(0, 1));
      thr   = (ntype == NT_INT4) ? ((15 << f) >> 1) : ((17 << f) >> 1);
      v1 = rnd_val(f); v2 = rnd_val(f);
      #1;
      expb = ref_enc4(longint'(v1), longint'(v2), f, longint'(thr), ntype == NT_FLINT4, int'(bias));
      checks++;
      if (byte_out != expb) begin
        failures++;
        if (failures < 10) $display("FAIL v1=%0d v2=%0d frac=%0d thr=%0d t=%0d b=%0d got=%b exp=%b",
                                    v1, v2, f, thr, ntype, bias, byte_out, expb);
      end
      if (byte_out[7:4] == 4'h8) n_left++;
      else if (byte_out[3:0] == 4'h8) n_right++;
      else n_norm++;
    end
    checks++;
    if (n_left == 0 || n_right == 0 || n_norm == 0) failures++;
    $display("left outliers %0d, right outliers %0d, normal pairs %0d", n_left, n_right, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
