// fp_ref_pkg -- reference arithmetic for the testbenches, written with
// SystemVerilog `real` (IEEE double) and no code shared with the RTL.
//
// Formats are (1, E, M) with bias 2^(E-1)-1, exponent code 0 = zero, no
// subnormals, no infinity/NaN, saturation at the largest magnitude and
// flush-to-zero below the smallest normal.
//   fp_val(bits,E,M)        value of a bit pattern
//   fp_rne(x,E,M)           x rounded to nearest-even and encoded
//   fp_trunc(x,E,M)         x rounded toward zero and encoded
//   fp_up(x,E,M)            x rounded away from zero and encoded
// Doubles hold every FP8/FP16 value, every product of two of them, and
// every sum whose operands are within 2^40 of each other exactly; wider
// sums are swamped so completely that the rounding result is unaffected.
package fp_ref_pkg;

  function automatic real pow2(int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp_val(longint unsigned bits, int E, int M);
    longint unsigned e, m;
    real v;
    int bias;
    bias = (1 << (E - 1)) - 1;
    e = (bits >> M) & ((64'd1 << E) - 1);
    m = bits & ((64'd1 << M) - 1);
    if (e == 0) return 0.0;
    v = (1.0 + real'(m) / real'(64'd1 << M)) * pow2(int'(e) - bias);
    if ((bits >> (E + M)) & 1) v = -v;
    return v;
  endfunction

  // dir: 0 nearest-even, 1 toward zero, 2 away from zero
  function automatic longint unsigned fp_enc(real x, int E, int M, int dir);
    longint unsigned s, mi, be;
    real a, frac, r;
    int e, bias;
    bias = (1 << (E - 1)) - 1;
    s = (x < 0.0) ? 1 : 0;
    a = (x < 0.0) ? -x : x;
    if (a == 0.0) return s << (E + M);
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a <  1.0) begin a = a * 2.0; e--; end
    frac = (a - 1.0) * real'(64'd1 << M);
    mi   = longint'($floor(frac));
    r    = frac - real'(mi);
    case (dir)
      0: if (r > 0.5 || (r == 0.5 && (mi & 1))) mi++;
      2: if (r > 0.0) mi++;
      default: ;
    endcase
    if (mi == (64'd1 << M)) begin mi = 0; e++; end
    if (e + bias > (1 << E) - 1)
      return (s << (E + M)) | ((64'd1 << (E + M)) - 1);
    if (e + bias < 1) return s << (E + M);
    be = longint'(e + bias);
    return (s << (E + M)) | (be << M) | mi;
  endfunction

  function automatic longint unsigned fp_rne(real x, int E, int M);
    return fp_enc(x, E, M, 0);
  endfunction
  function automatic longint unsigned fp_trunc(real x, int E, int M);
    return fp_enc(x, E, M, 1);
  endfunction
  function automatic longint unsigned fp_up(real x, int E, int M);
    return fp_enc(x, E, M, 2);
  endfunction

  // FP8 and FP16 shorthands
  function automatic real v8(logic [7:0] b);   return fp_val(64'(b), 5, 2); endfunction
  function automatic real v16(logic [15:0] b); return fp_val(64'(b), 6, 9); endfunction
  function automatic logic [15:0] rne16(real x); return 16'(fp_rne(x, 6, 9)); endfunction
  function automatic logic [7:0]  rne8(real x);  return 8'(fp_rne(x, 5, 2));  endfunction

  // equality of encodings, all zero codes (exponent 0) being equal
  function automatic bit same16(logic [15:0] a, logic [15:0] b);
    if (a[14:9] == 0 && b[14:9] == 0) return 1;
    return a == b;
  endfunction
  function automatic bit same8(logic [7:0] a, logic [7:0] b);
    if (a[6:2] == 0 && b[6:2] == 0) return 1;
    return a == b;
  endfunction

  // a random FP16 number with exponent code in [elo, ehi]
  function automatic logic [15:0] rand16(int elo, int ehi);
    logic [15:0] b;
    b = 16'($urandom);
    b[14:9] = 6'(elo + int'($urandom_range(ehi - elo)));
    return b;
  endfunction

  // a random FP8 number with exponent code in [elo, ehi]
  function automatic logic [7:0] rand8(int elo, int ehi);
    logic [7:0] b;
    b = 8'($urandom);
    b[6:2] = 5'(elo + int'($urandom_range(ehi - elo)));
    return b;
  endfunction

endpackage
