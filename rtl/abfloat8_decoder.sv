// abfloat8_decoder -- decoder of the 8-bit E4M3 abfloat used for outliers of
// 8-bit tensors.
//
// A code {s, e[3:0], m[2:0]} stands for (1mmm)_2 << (bias + e), negated when
// s is set, and for zero when e and m are all zero. This extends the 4-bit
// E2M1 decoding rule field by field: the paper adopts signed E4M3 for 8-bit
// abfloat and calls its decoder a straightforward extension of the 4-bit
// one without giving details. Output: 4-bit exponent (bias + e, wrapping)
// and 8-bit signed integer in [-15, 15]. A 4-bit exponent suffices because
// outliers are clipped to 2^15 in magnitude, so a valid exponent is at most
// 11. Purely combinational.
module abfloat8_decoder
  import olive_pkg::*;
(
  input  logic [7:0] code,
  input  logic [3:0] bias,
  output exp_int8_t  pair
);
  logic [7:0] mag;

  always_comb begin
    mag = (code[6:0] == 7'd0) ? 8'd0 : {5'b00001, code[2:0]};
    pair.exp_v = bias + code[6:3];
    pair.int_v = code[7] ? (~mag + 8'd1) : mag;
  end
endmodule
