// ovp_encoder8 -- 8-bit outlier-victim pair encoder (quantization unit for
// the 8-bit mode).
//
// Encodes two adjacent values into one 16-bit OVP pair with the same pair
// algorithm as the 4-bit encoder, widened to 8-bit elements:
//   if |v1| > T and |v1| > |v2|:  out1 = abfloat8(v1), out2 = 1000_0000
//   else if |v2| > T:             out1 = 1000_0000,    out2 = abfloat8(v2)
//   else:                         out1 = int8(v1),     out2 = int8(v2)
// out1 goes to bits 7:0 and out2 to bits 15:8, the order ovp_decoder8 reads.
// The paper states that the encoding "can easily extend to read two 8-bit
// elements simultaneously" with int8 normals (identifier 1000_0000) and
// signed E4M3 abfloat outliers; the details here are this design's.
//
// Inputs are signed fixed-point numbers with 'frac' fraction bits in units
// of the quantization step; T is in the same fixed point.
// int8(): round to nearest (ties away from zero), clamp to [-127, 127].
// abfloat8(): the abfloat algorithm with three mantissa bits:
// exp = floor(log2|x|) - 3, base = round(|x| / 2^exp) in 8..16, a 16
// becomes 8 with exp + 1; the code is {sign, exp - bias (4 bits), base[2:0]}.
// Outliers are clipped to a total exponent of 11, i.e. to at most
// 15 << 11 < 2^15, which is the paper's clip that keeps the 32-bit
// accumulators from overflowing (it also keeps <exp + 4, high nibble> inside
// the 4-bit exponent field of the PEs). Below the range the code saturates
// to 000_0001, and 000_0000 is raised to 000_0001, because 0000_0000 and
// 1000_0000 are not allowed for outliers.
// Purely combinational.
module ovp_encoder8
  import olive_pkg::*;
(
  input  logic signed [31:0] v1,
  input  logic signed [31:0] v2,
  input  logic        [4:0]  frac,
  input  logic        [31:0] thr,
  input  logic        [3:0]  bias,
  output logic        [15:0] pair_out
);
  localparam int EMAX = 11;   // largest total outlier exponent

  function automatic logic [31:0] magnitude(input logic signed [31:0] v);
    return v[31] ? 32'(-v) : 32'(v);
  endfunction

  // Normal value, int8.
  function automatic logic [7:0] quant_int8(input logic signed [31:0] v,
                                             input logic [4:0] f);
    logic [31:0] a;
    logic [39:0] r;
    logic [7:0]  m;
    a = magnitude(v);
    r = (f == 0) ? 40'(a) : ((40'(a) + (40'd1 << (f - 5'd1))) >> f);
    m = (r > 40'd127) ? 8'd127 : r[7:0];
    return (v[31] && m != 0) ? (~m + 8'd1) : m;
  endfunction

  // Outlier value, E4M3 abfloat.
  function automatic logic [7:0] quant_abfloat8(input logic signed [31:0] v,
                                                 input logic [4:0] f,
                                                 input logic [3:0] b);
    logic [31:0] a;
    int          lead, e;
    logic [4:0]  base;
    logic [6:0]  code;
    a = magnitude(v);
    lead = 0;
    for (int k = 0; k < 32; k++) if (a[k]) lead = k;
    e = lead - int'(f) - 3;
    if (lead >= 4)      base = {1'b0, a[lead -: 4]} + {4'b0000, a[lead-4]};
    else if (lead == 3) base = {1'b0, a[3:0]};
    else                base = 5'({1'b0, a[3:0]} << (3 - lead));
    if (base == 5'd16) begin
      e    = e + 1;
      base = 5'd8;
    end
    if (e > EMAX) begin
      e    = EMAX;
      base = 5'd15;
    end
    e = e - int'(b);
    if (e < 0) code = 7'd1;
    else       code = {e[3:0], base[2:0]};
    if (code == 7'd0) code = 7'd1;
    return {v[31], code};
  endfunction

  logic [31:0] a1, a2;
  logic [7:0]  out1, out2;

  always_comb begin
    a1 = magnitude(v1);
    a2 = magnitude(v2);
    if (a1 > thr && a1 > a2) begin
      out1 = quant_abfloat8(v1, frac, bias);
      out2 = OVP_ID8;
    end else if (a2 > thr) begin
      out1 = OVP_ID8;
      out2 = quant_abfloat8(v2, frac, bias);
    end else begin
      out1 = quant_int8(v1, frac);
      out2 = quant_int8(v2, frac);
    end
    pair_out = {out2, out1};
  end
endmodule
