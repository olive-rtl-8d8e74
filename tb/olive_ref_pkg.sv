// olive_ref_pkg -- reference models for the OliVe testbenches.
//
// Values are computed the way the number formats define them, not the way
// the RTL builds them: abfloat and flint4 values come from their value
// tables (E2M1 with bias 0: 0, 3, 4, 6, 8, 12, 16, 24, then shifted by the
// bias), the pair rules from the outlier-victim pair definition, and the
// encoder reference works in real arithmetic.
package olive_ref_pkg;

  function automatic longint abf4_val(input logic [3:0] code, input int bias);
    longint t[8] = '{0, 3, 4, 6, 8, 12, 16, 24};
    longint m = t[code[2:0]] <<< bias;
    return code[3] ? -m : m;
  endfunction

  function automatic longint norm4_val(input logic [3:0] code, input bit flint);
    longint t[8] = '{0, 1, 2, 3, 4, 6, 8, 16};
    if (!flint) return longint'($signed(code));
    return code[3] ? -t[code[2:0]] : t[code[2:0]];
  endfunction

  // Value of element idx (0 = bits 3:0, 1 = bits 7:4) of a 4-bit OVP byte.
  function automatic longint ovp4_val(input logic [7:0] b, input bit flint, input int bias, input int idx);
    logic [3:0] v1 = b[3:0], v2 = b[7:4];
    if (idx == 0) begin
      if (v1 == 4'h8) return 0;
      if (v2 == 4'h8) return abf4_val(v1, bias);
      return norm4_val(v1, flint);
    end else begin
      if (v2 == 4'h8) return 0;
      if (v1 == 4'h8) return abf4_val(v2, bias);
      return norm4_val(v2, flint);
    end
  endfunction

  function automatic longint abf8_val(input logic [7:0] code, input int bias);
    longint m;
    if (code[6:0] == 0) return 0;
    m = longint'(8 + code[2:0]) <<< (bias + code[6:3]);
    return code[7] ? -m : m;
  endfunction

  function automatic longint ovp8_val(input logic [15:0] p, input int bias, input int idx);
    logic [7:0] v1 = p[7:0], v2 = p[15:8];
    if (idx == 0) begin
      if (v1 == 8'h80) return 0;
      if (v2 == 8'h80) return abf8_val(v1, bias);
      return longint'($signed(v1));
    end else begin
      if (v2 == 8'h80) return 0;
      if (v1 == 8'h80) return abf8_val(v2, bias);
      return longint'($signed(v2));
    end
  endfunction

  // ---- encoder reference (real arithmetic) ----
  function automatic logic [3:0] ref_abf_q(input longint v, input int frac, input int bias);
    real x = ((v < 0) ? -v : v) / (2.0 ** frac);
    int n = -40, e, code;
    real base;
    while (2.0 ** (n + 1) <= x) n++;
    e = n - 1;
    base = $floor(x / (2.0 ** e) + 0.5);
    if (base == 4.0) begin e = e + 1; base = 2.0; end
    e = e - bias;
    if (e < 0) code = 1;
    else if (e > 3) code = 7;
    else code = e * 2 + ((base == 3.0) ? 1 : 0);
    if (code == 0) code = 1;
    return {(v < 0), 3'(code)};
  endfunction

  function automatic logic [3:0] ref_norm_q(input longint v, input int frac, input bit flint);
    real x = ((v < 0) ? -v : v) / (2.0 ** frac);
    real t[8] = '{0.0, 1.0, 2.0, 3.0, 4.0, 6.0, 8.0, 16.0};
    int r, best;
    if (!flint) begin
      r = int'($floor(x + 0.5));
      if (r > 7) r = 7;
      return (v < 0) ? 4'(-r) : 4'(r);
    end
    best = 0;
    for (int k = 1; k < 8; k++)
      if ((x - t[k] < 0 ? t[k] - x : x - t[k]) <= (x - t[best] < 0 ? t[best] - x : x - t[best])) best = k;
    if (best == 0) return 4'b0000;
    return {(v < 0), 3'(best)};
  endfunction

  function automatic logic [7:0] ref_enc4(input longint v1, input longint v2, input int frac,
                                          input longint thr, input bit flint, input int bias);
    longint a1 = (v1 < 0) ? -v1 : v1;
    longint a2 = (v2 < 0) ? -v2 : v2;
    if (a1 > thr && a1 > a2) return {4'h8, ref_abf_q(v1, frac, bias)};
    if (a2 > thr) return {ref_abf_q(v2, frac, bias), 4'h8};
    return {ref_norm_q(v2, frac, flint), ref_norm_q(v1, frac, flint)};
  endfunction

  // 8-bit encoder reference: int8 normals, E4M3 abfloat outliers clipped to
  // a total exponent of 11 (at most 15 << 11).
  function automatic logic [7:0] ref_abf8_q(input longint v, input int frac, input int bias);
    real x = ((v < 0) ? -v : v) / (2.0 ** frac);
    int n = -40, e, code;
    real base;
    while (2.0 ** (n + 1) <= x) n++;
    e = n - 3;
    base = $floor(x / (2.0 ** e) + 0.5);
    if (base == 16.0) begin e = e + 1; base = 8.0; end
    if (e > 11) begin e = 11; base = 15.0; end
    e = e - bias;
    if (e < 0) code = 1;
    else code = e * 8 + int'(base) - 8;
    if (code == 0) code = 1;
    return {(v < 0), 7'(code)};
  endfunction
  function automatic logic [7:0] ref_int8_q(input longint v, input int frac);
    real x = ((v < 0) ? -v : v) / (2.0 ** frac);
    int r = int'($floor(x + 0.5));
    if (r > 127) r = 127;
    return (v < 0) ? 8'(-r) : 8'(r);
  endfunction
  function automatic logic [15:0] ref_enc8(input longint v1, input longint v2, input int frac,
                                           input longint thr, input int bias);
    longint a1 = (v1 < 0) ? -v1 : v1;
    longint a2 = (v2 < 0) ? -v2 : v2;
    if (a1 > thr && a1 > a2) return {8'h80, ref_abf8_q(v1, frac, bias)};
    if (a2 > thr) return {ref_abf8_q(v2, frac, bias), 8'h80};
    return {ref_int8_q(v2, frac), ref_int8_q(v1, frac)};
  endfunction
endpackage
