// normal4_decoder -- decoder of a 4-bit normal (non-outlier) value into an
// exponent-integer pair <exp, int> with value int << exp.
//
// int4 (ntype = NT_INT4): the value is the two's complement code itself and
// the exponent is 0000, as the paper specifies.
// flint4 (ntype = NT_FLINT4): the paper adopts this type from prior work and
// lists its values, 0, +-1, +-2, +-3, +-4, +-6, +-8, +-16, with 1000 meaning
// -0. The bit assignment is this design's choice: bit 3 is the sign and bits
// 2:0 index the magnitudes in increasing order. Magnitudes above 3 are given
// a non-zero exponent so that the integer stays within 4 signed bits:
// 4 = <1,2>, 6 = <1,3>, 8 = <2,2>, 16 = <3,2>.
// The identifier 1000 is removed by the pair decoder before this output is
// used. Purely combinational.
module normal4_decoder
  import olive_pkg::*;
(
  input  logic [3:0] code,
  input  ntype_e     ntype,
  output exp_int4_t  pair
);
  logic [3:0] mag;

  always_comb begin
    mag = 4'd0;
    if (ntype == NT_INT4) begin
      pair.exp_v = 4'd0;
      pair.int_v = code;
    end else begin
      unique case (code[2:0])
        3'd0: begin pair.exp_v = 4'd0; mag = 4'd0; end
        3'd1: begin pair.exp_v = 4'd0; mag = 4'd1; end
        3'd2: begin pair.exp_v = 4'd0; mag = 4'd2; end
        3'd3: begin pair.exp_v = 4'd0; mag = 4'd3; end
        3'd4: begin pair.exp_v = 4'd1; mag = 4'd2; end
        3'd5: begin pair.exp_v = 4'd1; mag = 4'd3; end
        3'd6: begin pair.exp_v = 4'd2; mag = 4'd2; end
        default: begin pair.exp_v = 4'd3; mag = 4'd2; end
      endcase
      pair.int_v = code[3] ? (~mag + 4'd1) : mag;
    end
  end
endmodule
