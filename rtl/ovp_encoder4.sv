// ovp_encoder4 -- 4-bit outlier-victim pair encoder (quantization unit).
//
// Encodes two adjacent values into one OVP byte, following the paper's pair
// encoding algorithm:
//   if |v1| > T and |v1| > |v2|:  out1 = abfloat(v1), out2 = 1000 (victim)
//   else if |v2| > T:             out1 = 1000,        out2 = abfloat(v2)
//   else:                         out1 = normal(v1),  out2 = normal(v2)
// out1 goes to bits 3:0 and out2 to bits 7:4, the order the decoder reads.
//
// Inputs are signed fixed-point numbers with 'frac' fraction bits, already
// in units of the quantization step (a power-of-two scale is this design's
// choice; the paper picks the scale offline by an MSE search). T is given in
// the same fixed point. Magnitudes are compared, so a large negative value
// is an outlier too.
//
// normal(): int4 rounds to the nearest integer and clamps to [-7, 7]; flint4
// rounds to the nearest of 0, 1, 2, 3, 4, 6, 8, 16 and codes the magnitude
// index in bits 2:0 with the sign in bit 3 (a zero is always 0000, never the
// identifier 1000). Ties round away from zero.
// abfloat(): E2M1 as in the paper's abfloat algorithm: exp = floor(log2|x|)
// - 1, base = round(|x| / 2^exp) in {2, 3, 4}, a 4 becomes 2 with exp + 1,
// then the code is {sign, exp - bias (2 bits), base & 1}. Out-of-range
// exponents saturate to code 111 or 001; the code 000 is raised to 001,
// because 0000 and 1000 are not allowed for outliers.
// Purely combinational.
module ovp_encoder4
  import olive_pkg::*;
(
  input  logic signed [31:0] v1,
  input  logic signed [31:0] v2,
  input  logic        [4:0]  frac,
  input  logic        [31:0] thr,
  input  ntype_e             ntype,
  input  logic        [3:0]  bias,
  output logic        [7:0]  byte_out
);
  function automatic logic [31:0] magnitude(input logic signed [31:0] v);
    return v[31] ? 32'(-v) : 32'(v);
  endfunction

  // Normal value, int4 or flint4.
  function automatic logic [3:0] quant_normal(input logic signed [31:0] v,
                                               input logic [4:0] f,
                                               input ntype_e t);
    logic [31:0] a;
    logic [39:0] r, y;
    logic [2:0]  idx;
    logic [3:0]  m;
    a = magnitude(v);
    if (t == NT_INT4) begin
      r = (f == 0) ? 40'(a) : ((40'(a) + (40'd1 << (f - 5'd1))) >> f);
      m = (r > 40'd7) ? 4'd7 : r[3:0];
      return (v[31] && m != 0) ? (~m + 4'd1) : m;
    end else begin
      // Rounding boundaries in half units: 0.5 1.5 2.5 3.5 5 7 12.
      y = 40'(a) << 1;
      idx = 3'd0;
      if (y >= (40'd1  << f)) idx = 3'd1;
      if (y >= (40'd3  << f)) idx = 3'd2;
      if (y >= (40'd5  << f)) idx = 3'd3;
      if (y >= (40'd7  << f)) idx = 3'd4;
      if (y >= (40'd10 << f)) idx = 3'd5;
      if (y >= (40'd14 << f)) idx = 3'd6;
      if (y >= (40'd24 << f)) idx = 3'd7;
      return (idx == 0) ? 4'b0000 : {v[31], idx};
    end
  endfunction

  // Outlier value, E2M1 abfloat.
  function automatic logic [3:0] quant_abfloat(input logic signed [31:0] v,
                                                input logic [4:0] f,
                                                input logic [3:0] b);
    logic [31:0] a;
    int          lead, e;
    logic [2:0]  base;
    logic [2:0]  code;
    a = magnitude(v);
    lead = 0;
    for (int k = 0; k < 32; k++) if (a[k]) lead = k;
    e = lead - int'(f) - 1;
    if (lead == 0) base = 3'd2;
    else base = {2'b01, a[lead-1]} + ((lead >= 2) ? {2'b00, a[lead-2]} : 3'd0);
    if (base == 3'd4) begin
      e    = e + 1;
      base = 3'd2;
    end
    e = e - int'(b);
    if (e < 0)      code = 3'b001;
    else if (e > 3) code = 3'b111;
    else            code = {e[1:0], base[0]};
    if (code == 3'b000) code = 3'b001;
    return {v[31], code};
  endfunction

  logic [31:0] a1, a2;
  logic [3:0]  out1, out2;

  always_comb begin
    a1 = magnitude(v1);
    a2 = magnitude(v2);
    if (a1 > thr && a1 > a2) begin
      out1 = quant_abfloat(v1, frac, bias);
      out2 = OVP_ID4;
    end else if (a2 > thr) begin
      out1 = OVP_ID4;
      out2 = quant_abfloat(v2, frac, bias);
    end else begin
      out1 = quant_normal(v1, frac, ntype);
      out2 = quant_normal(v2, frac, ntype);
    end
    byte_out = {out2, out1};
  end
endmodule
