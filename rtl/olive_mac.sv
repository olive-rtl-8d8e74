// olive_mac -- OliVe MAC unit, the processing element (PE) of the
// output-stationary systolic array.
//
// Both operands arrive as exponent-integer pairs <a, b> (value b << a). The
// PE adds the exponents, multiplies the integers and shifts the product:
//   <a, b> x <c, d> = (b * d) << (a + c)
// and adds the result into its 32-bit accumulator, as in the paper's MAC
// unit (exponent adder, multiplier, shifter, accumulator adder).
//
// 8-bit operation: four PEs of a 2x2 group compute one 8-bit product, each
// taking one 4-bit part of x = <4, h> + <0, l>. The high part h is signed,
// the low part l is unsigned. Which operand is a low part is fixed by the
// PE's position: with mode8 set, a PE on an odd row (LOW_ROW) reads the
// activation integer as unsigned and one on an odd column (LOW_COL) reads the
// weight integer as unsigned. The multiplier therefore works on 5-bit
// signed operands; this follows the bit-brick scheme the paper cites, the
// exact mechanism being this design's choice.
//
// Timing: the activation (with its valid bit) is forwarded to the right and
// the weight downward through one register each, so neighbours see them one
// cycle later. The accumulator adds when a_vld_in is set, and clr (which
// wins) zeroes it. The accumulator wraps at 32 bits; the paper avoids
// overflow by clipping outliers to 2^15.
module olive_mac
  import olive_pkg::*;
#(
  parameter bit LOW_ROW = 1'b0,  // this PE holds the low activation nibble in 8-bit mode
  parameter bit LOW_COL = 1'b0   // this PE holds the low weight nibble in 8-bit mode
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clr,
  input  logic      mode8,
  input  exp_int4_t a_in,
  input  logic      a_vld_in,
  input  exp_int4_t w_in,
  output exp_int4_t a_out,
  output logic      a_vld_out,
  output exp_int4_t w_out,
  output logic [ACC_W-1:0] acc
);
  logic signed [4:0]       ai, wi;
  logic signed [9:0]       prod;
  logic        [4:0]       shamt;
  logic signed [ACC_W-1:0] term;

  always_comb begin
    ai    = (mode8 && LOW_ROW) ? $signed({1'b0, a_in.int_v}) : $signed({a_in.int_v[3], a_in.int_v});
    wi    = (mode8 && LOW_COL) ? $signed({1'b0, w_in.int_v}) : $signed({w_in.int_v[3], w_in.int_v});
    prod  = ai * wi;
    shamt = {1'b0, a_in.exp_v} + {1'b0, w_in.exp_v};
    term  = ACC_W'(prod) <<< shamt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      a_out     <= '0;
      a_vld_out <= 1'b0;
      w_out     <= '0;
    end else begin
      a_out     <= a_in;
      a_vld_out <= a_vld_in;
      w_out     <= w_in;
      if (clr)           acc <= '0;
      else if (a_vld_in) acc <= acc + term;
    end
  end
endmodule
