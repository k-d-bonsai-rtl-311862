// tb_fp_ref_pkg: reference floating-point arithmetic for the testbenches.
//
// Works on `real` (binary64) values, independently of the RTL: a value is
// rounded to a narrower format by dividing it by the unit in the last place,
// rounding to the nearest integer with ties to even and multiplying back.
// Encoders/decoders turn exact values into binary32/binary16 bit patterns.
// Every binary32 and binary16 value, and every exact sum, difference or
// product used by the tests, is exactly representable in binary64.
package tb_fp_ref_pkg;

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic int ilog2(input real a);   // a > 0: floor(log2 a)
    int e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    return e;
  endfunction

  // Round |v| to a format with man_bits fraction bits and minimum normal
  // exponent emin; returns the rounded value (sign kept).
  function automatic real round_fmt(input real v, input int man_bits, input int emin);
    real a, ulp, q, fl, fr;
    int  e;
    a = (v < 0) ? -v : v;
    if (a == 0.0) return 0.0;
    e = ilog2(a);
    if (e < emin) e = emin;
    ulp = pow2(e - man_bits);
    q   = a / ulp;
    fl  = $floor(q);
    fr  = q - fl;
    if (fr > 0.5 || (fr == 0.5 && ($floor(fl / 2.0) * 2.0 != fl))) fl = fl + 1.0;
    a = fl * ulp;
    return (v < 0) ? -a : a;
  endfunction

  // Encode an exactly representable value (or overflow -> inf).
  function automatic logic [31:0] enc_f32(input real v);
    real a;
    int  e;
    logic s;
    s = (v < 0);
    a = s ? -v : v;
    if (a == 0.0) return {s, 31'd0};
    if (a >= pow2(128)) return {s, 8'hff, 23'd0};
    e = ilog2(a);
    if (e < -126) return {s, 8'd0, 23'(longint'(a / pow2(-149)))};
    return {s, 8'(e + 127), 23'(longint'(a / pow2(e - 23)) - (longint'(1) << 23))};
  endfunction

  function automatic logic [15:0] enc_f16(input real v);
    real a;
    int  e;
    logic s;
    s = (v < 0);
    a = s ? -v : v;
    if (a == 0.0) return {s, 15'd0};
    if (a >= pow2(16)) return {s, 5'h1f, 10'd0};
    e = ilog2(a);
    if (e < -14) return {s, 5'd0, 10'(longint'(a / pow2(-24)))};
    return {s, 5'(e + 15), 10'(longint'(a / pow2(e - 10)) - 1024)};
  endfunction

  function automatic real dec_f32(input logic [31:0] b);
    real m;
    m = real'(b[22:0]);
    if (b[30:23] == 0) m = m * pow2(-149);
    else               m = (m + pow2(23)) * pow2(int'(b[30:23]) - 150);
    return b[31] ? -m : m;
  endfunction

  function automatic real dec_f16(input logic [15:0] b);
    real m;
    m = real'(b[9:0]);
    if (b[14:10] == 0) m = m * pow2(-24);
    else               m = (m + 1024.0) * pow2(int'(b[14:10]) - 25);
    return b[15] ? -m : m;
  endfunction

  function automatic real r32(input real v);   // round to binary32
    return round_fmt(v, 23, -126);
  endfunction

  function automatic logic [15:0] to_f16(input real v);   // RNE to binary16 bits
    return enc_f16(round_fmt(v, 10, -14));
  endfunction

  // Random binary32 value with a biased exponent in [elo, ehi].
  function automatic logic [31:0] rand_f32(input int elo, input int ehi);
    logic [7:0] e;
    e = 8'(elo + int'($urandom_range(0, ehi - elo)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  // Reference of the square-of-differences FU: {sq_diff, error}.
  function automatic logic [63:0] sqdiff_ref(input logic [31:0] a, input logic [15:0] bh);
    real d, sq, lin, dsq, err;
    int  e;
    e   = (bh[14:10] == 0) ? 1 : int'(bh[14:10]);
    d   = r32(dec_f32(a) - dec_f16(bh));
    sq  = r32(d * d);
    lin = r32(((d < 0) ? -d : d) * pow2(e - 25));
    dsq = pow2(2 * e - 52);
    err = r32(lin + dsq);
    return {enc_f32(sq), enc_f32(err)};
  endfunction

endpackage
