// ovp_decoder4 -- 4-bit outlier-victim pair (OVP) decoder.
//
// One byte holds one pair of adjacent tensor values: value 1 in bits 3:0 and
// value 2 in bits 7:4. The code 1000 marks a victim, the pruned partner of
// an outlier. The decoder
//   * turns a victim into the zero pair (exponent 0, integer 0),
//   * decodes the other value of a victim's pair as an E2M1 abfloat outlier
//     (one abfloat4_decoder, shared by both positions through a mux),
//   * decodes both values of a pair without victim as normal int4/flint4
//     values (one normal4_decoder per position).
// The output carries value 1's exponent-integer pair in bits 7:0 and value
// 2's in bits 15:8, so a byte in gives two PE operands out. A byte with both
// halves 1000 never comes from the encoder; here it decodes to two zeros
// (this design's choice). Purely combinational.
module ovp_decoder4
  import olive_pkg::*;
(
  input  logic [7:0]  byte_in,
  input  ntype_e      ntype,     // data type of the normal values
  input  logic [3:0]  bias,      // abfloat bias of the outliers
  output exp_int4_t [1:0] pairs  // [0] = value 1, [1] = value 2
);
  logic [3:0] v1, v2;
  logic       v1_id, v2_id;
  exp_int4_t  n1, n2, o;
  logic [3:0] o_code;

  assign v1 = byte_in[3:0];
  assign v2 = byte_in[7:4];
  assign v1_id = (v1 == OVP_ID4);
  assign v2_id = (v2 == OVP_ID4);

  // The outlier of the pair is the value whose partner is the identifier.
  assign o_code = v1_id ? v2 : v1;

  normal4_decoder u_norm1 (.code(v1), .ntype(ntype), .pair(n1));
  normal4_decoder u_norm2 (.code(v2), .ntype(ntype), .pair(n2));
  abfloat4_decoder u_outl (.code(o_code), .bias(bias), .pair(o));

  always_comb begin
    pairs[0] = v1_id ? '0 : (v2_id ? o : n1);
    pairs[1] = v2_id ? '0 : (v1_id ? o : n2);
  end
endmodule
