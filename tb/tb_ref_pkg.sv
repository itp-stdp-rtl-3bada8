// tb_ref_pkg -- reference models shared by the testbenches. They are
// written from the arithmetic definitions (real numbers, logarithms,
// integer division) rather than from the RTL's bit manipulations:
//   ref_mitchell : compensated Mitchell product, C = 21/256, C/2 = 11/256
//   ref_llsmu    : MSB alignment and Karatsuba composition of three
//                  ref_mitchell products
//   ref_mag      : ITP-STDP weight-read magnitude of a history
//   ref_scale    : learning-rate shift and ln 2 compensation of a change
package tb_ref_pkg;

  function automatic int ilog2(input int v);
    int k = 0;
    while ((2 ** (k + 1)) <= v) k++;
    return k;
  endfunction

  function automatic int ref_mitchell(input int x, input int y);
    int  kx, ky;
    real fx, fy, f, m;
    if (x == 0 || y == 0) return 0;
    kx = ilog2(x);
    ky = ilog2(y);
    fx = real'(x) / (2.0 ** kx) - 1.0;
    fy = real'(y) / (2.0 ** ky) - 1.0;
    f  = fx + fy;
    if (f < 1.0) m = (2.0 ** (kx + ky)) * (1.0 + f + 21.0 / 256.0);
    else         m = (2.0 ** (kx + ky + 1)) * (f + 11.0 / 256.0);
    return int'($floor(m));
  endfunction

  // 8 x 8 segmented product: MSB-align both operands, Karatsuba on 4-bit
  // halves with Mitchell products, shift back by the alignment.
  function automatic int ref_llsmu(input int a, input int b, input int shift);
    int sa, sb, ha, la, hb, lb, m0, m1, m2, s3, p;
    if (a == 0 || b == 0) return 0;
    sa = 7 - ilog2(a);
    sb = 7 - ilog2(b);
    a  = a * (2 ** sa);
    b  = b * (2 ** sb);
    ha = a / 16; la = a % 16;
    hb = b / 16; lb = b % 16;
    m0 = ref_mitchell(la, lb);
    m1 = ref_mitchell(ha, hb);
    m2 = ref_mitchell(ha + la, hb + lb);
    s3 = m2 - m0 - m1;
    p  = m1 * 256 + s3 * 16 + m0;
    if (p < 0) p = 0;
    p = p / (2 ** (sa + sb));
    p = p / (2 ** shift);
    if (p > 65535) p = 65535;
    return p;
  endfunction

  // hist: D-bit history; nearest: keep only the highest set bit
  function automatic int ref_mag(input int hist, input bit nearest);
    if (!nearest || hist == 0) return hist;
    return 2 ** ilog2(hist);
  endfunction

  function automatic int floor_div(input int v, input int d);
    return int'($floor(real'(v) / real'(d)));
  endfunction

  function automatic int ref_scale(input int dw, input int lr_shift, input bit comp);
    int s;
    s = floor_div(dw, 2 ** lr_shift);
    if (comp) s = floor_div(s, 2) + floor_div(s, 8) + floor_div(s, 16);
    return s;
  endfunction

  function automatic int sat8(input int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction

endpackage
