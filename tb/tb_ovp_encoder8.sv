// tb_ovp_encoder8 -- checks the 8-bit OVP encoder against a real-arithmetic
// model of the pair encoding with int8 normals and E4M3 abfloat outliers
// (olive_ref_pkg), for random values, fraction widths and biases, plus
// fixed cases: the clip at 15 << 11, a value just above the threshold, and
// a round-trip through ovp_decoder8's value rule. Counts left outliers, right
// outliers, clipped outliers and normal pairs; each must occur.
module tb_ovp_encoder8;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  logic signed [31:0] v1, v2;
  logic [4:0]  frac;
  logic [31:0] thr;
  logic [3:0]  bias;
  logic [15:0] pair_out, expp;
  int checks = 0, failures = 0, n_left = 0, n_right = 0, n_norm = 0, n_clip = 0;

  ovp_encoder8 dut (.v1, .v2, .frac, .thr, .bias, .pair_out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [31:0] rnd_val(input int f);
    int m;
    case ($urandom_range(0, 3))
      0: m = $urandom_range(0, 130 << f);        // normal range
      1: m = $urandom_range(0, 4000 << f);       // outliers
      2: m = $urandom_range(0, 60000) << f;      // up to and past the clip
      default: m = $urandom_range(0, 3) << f;    // exact small values
    endcase
    return $urandom_range(0, 1) ? -m : m;
  endfunction

  task automatic check(input string what);
    #1;
    expp = ref_enc8(longint'(v1), longint'(v2), int'(frac), longint'(thr), int'(bias));
    checks++;
    if (pair_out != expp) begin
      failures++;
      if (failures < 10) $display("FAIL %s v1=%0d v2=%0d frac=%0d thr=%0d b=%0d got=%h exp=%h",
                                  what, v1, v2, frac, thr, bias, pair_out, expp);
    end
    if (pair_out[15:8] == 8'h80) n_left++;
    else if (pair_out[7:0] == 8'h80) n_right++;
    else n_norm++;
  endtask

  initial begin
    // clip: 40000 with bias 4 -> 15 << 11, code {0, 0111, 111}
    v1 = 32'sd40000; v2 = 32'sd5; frac = 5'd0; thr = 32'd127; bias = 4'd4;
    #1;
    checks++;
    if (pair_out != 16'h80_3f || abf8_val(pair_out[7:0], 4) != 30720) begin
      failures++; $display("FAIL clip %h", pair_out);
    end
    // just above the threshold, right outlier, negative: -130 -> -(8 << 4) is
    // not allowed (code 0), so the smallest outlier -(9 << 4) is used
    v1 = 32'sd3; v2 = -32'sd130; frac = 5'd0; thr = 32'd127; bias = 4'd4;
    #1;
    checks++;
    if (pair_out != 16'h81_80 || ovp8_val(pair_out, 4, 1) != -144 || ovp8_val(pair_out, 4, 0) != 0) begin
      failures++; $display("FAIL threshold %h", pair_out);
    end
    // normal pair with rounding: 2.5 -> 3, -126.6 -> -127 with 2 fraction bits
    v1 = 32'sd10; v2 = -32'sd506; frac = 5'd2; thr = 32'd510; bias = 4'd4;
    #1;
    checks++;
    if (pair_out != {8'h81, 8'h03}) begin failures++; $display("FAIL normal %h", pair_out); end
    for (int n = 0; n < 20000; n++) begin
      int f = $urandom_range(0, 6);
      frac = 5'(f);
      bias = 4'($urandom_range(3, 5));
      thr  = (255 << f) >> 1;
      v1 = rnd_val(f); v2 = rnd_val(f);
      check("random");
      // a clipped outlier decodes to 15 << 11
      if (pair_out[15:8] == 8'h80 && abf8_val(pair_out[7:0], int'(bias)) inside {30720, -30720}) n_clip++;
    end
    checks++;
    if (n_left == 0 || n_right == 0 || n_norm == 0 || n_clip == 0) failures++;
    $display("left outliers %0d, right outliers %0d, normal pairs %0d, clipped %0d", n_left, n_right, n_norm, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
