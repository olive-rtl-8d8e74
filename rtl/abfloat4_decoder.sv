// abfloat4_decoder -- decoder of the 4-bit E2M1 "adaptive biased float"
// (abfloat) used for outliers.
//
// A code x = {s, b2, b1, b0} stands for the value (1b0)_2 << (bias + b2b1),
// negated when s is set, and for zero when b2b1b0 = 000. The block returns
// it as an exponent-integer pair:
//   exponent = bias + b2b1                         (4 bits, wraps)
//   integer  = 0 if b2b1b0 = 000, else {0,0,1,b0}; two's complement negated
//              when s = 1 (invert and add one), so it lies in [-3, 3].
// This follows the paper's decoder equations and its diagram: the bias adder,
// the constant 001 joined above b0, the 0000 constant for x = 000, and the
// negate path selected by the sign bit. The bias is an instruction operand.
// Purely combinational; no clock.
module abfloat4_decoder
  import olive_pkg::*;
(
  input  logic [3:0] code,  // {sign, e1, e0, m0}
  input  logic [3:0] bias,  // adaptive exponent bias
  output exp_int4_t  pair
);
  logic [3:0] mag;   // unsigned integer before the sign is applied

  always_comb begin
    mag = (code[2:0] == 3'b000) ? 4'b0000 : {3'b001, code[0]};
    pair.exp_v = bias + {2'b00, code[2:1]};
    pair.int_v = code[3] ? (~mag + 4'd1) : mag;
  end
endmodule
