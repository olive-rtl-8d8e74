// ovp_decoder8 -- 8-bit outlier-victim pair decoder.
//
// Two bytes hold a pair of adjacent 8-bit values: value 1 in bits 7:0 and
// value 2 in bits 15:8. The code 1000_0000 (-128, removed from int8 so its
// range is [-127, 127]) marks a victim. A victim decodes to zero, its
// partner is decoded as an E4M3 abfloat outlier, and the values of a pair
// without victim are int8 normals returned as <0, value>. The structure
// mirrors ovp_decoder4; int8 is the only 8-bit normal type. Output: value
// 1's exponent-integer pair in bits 11:0, value 2's in bits 23:12. Purely
// combinational.
module ovp_decoder8
  import olive_pkg::*;
(
  input  logic [15:0] pair_in,
  input  logic [3:0]  bias,
  output exp_int8_t [1:0] pairs
);
  logic [7:0] v1, v2, o_code;
  logic       v1_id, v2_id;
  exp_int8_t  n1, n2, o;

  assign v1 = pair_in[7:0];
  assign v2 = pair_in[15:8];
  assign v1_id = (v1 == OVP_ID8);
  assign v2_id = (v2 == OVP_ID8);
  assign o_code = v1_id ? v2 : v1;

  abfloat8_decoder u_outl (.code(o_code), .bias(bias), .pair(o));

  always_comb begin
    n1.exp_v = '0;
    n1.int_v = v1;
    n2.exp_v = '0;
    n2.int_v = v2;
    pairs[0] = v1_id ? '0 : (v2_id ? o : n1);
    pairs[1] = v2_id ? '0 : (v1_id ? o : n2);
  end
endmodule
