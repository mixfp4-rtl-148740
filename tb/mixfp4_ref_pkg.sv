// mixfp4_ref_pkg -- reference arithmetic for the testbenches.
//
// Value functions written from the format definitions, independent of the
// RTL: FP4 element values in both MixFP4 formats (E1M2 including the fixed
// x2 INT4 mapping), unsigned E4M3 scale values, IEEE single to real, and
// real to IEEE single with round to nearest, ties to even (including
// subnormal results and overflow to infinity).
package mixfp4_ref_pkg;

  // Magnitude of a 3-bit FP4 payload. t = 0: E2M1 (bias 1). t = 1: E1M2
  // (bias 0) times 2, i.e. the integer c.
  function automatic real fp4_value(input logic [3:0] code, input logic t);
    real mag;
    int  e, m;
    if (!t) begin
      e = int'(code[2:1]); m = int'(code[0]);
      mag = (e == 0) ? (m / 2.0) : (2.0 ** (e - 1)) * (1.0 + m / 2.0);
    end else begin
      e = int'(code[2]); m = int'(code[1:0]);
      // bias 0, subnormal 2^(1-0) * m/4
      mag = 2.0 * ((e == 0) ? 2.0 * (m / 4.0) : (2.0 ** e) * (1.0 + m / 4.0));
    end
    return code[3] ? -mag : mag;
  endfunction

  // Unsigned E4M3 (bias 7) value of the 7 magnitude bits.
  function automatic real e4m3_value(input logic [6:0] x);
    int e, m;
    e = int'(x[6:3]); m = int'(x[2:0]);
    if (e == 0) return (m / 8.0) * (2.0 ** -6);
    return (2.0 ** (e - 7)) * (1.0 + m / 8.0);
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    int  e;
    real v;
    e = int'(f[30:23]);
    if (e == 0) v = real'(f[22:0]) * (2.0 ** -149);
    else        v = (2.0 ** (e - 127)) * (1.0 + real'(f[22:0]) / (2.0 ** 23));
    return f[31] ? -v : v;
  endfunction

  // Round a real (double) to the nearest IEEE single, ties to even.
  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0]  d;
    logic         s;
    int           e, sh;
    logic [52:0]  m53;
    logic [52:0]  kept, rem, half;
    longint       res;
    if (r == 0.0) return {($realtobits(r) >> 63) != 0, 31'd0};
    d   = $realtobits(r);
    s   = d[63];
    e   = int'(d[62:52]) - 1023;
    m53 = {1'b1, d[51:0]};
    if (e > 127) return {s, 8'hff, 23'd0};
    sh  = (e >= -126) ? 29 : 29 + (-126 - e);
    if (sh > 53) return {s, 31'd0};
    kept = m53 >> sh;
    rem  = m53 & ~({53{1'b1}} << sh);
    half = 53'd1 << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept = kept + 1;
    if (e >= -126) res = ((longint'(e) + longint'(127)) << 23) + longint'(kept) - (longint'(1) << 23);
    else           res = longint'(kept);
    if (res >= 64'h7f80_0000) return {s, 8'hff, 23'd0};
    return {s, res[30:0]};
  endfunction

endpackage
