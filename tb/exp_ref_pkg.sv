// exp_ref_pkg: reference models for the e^-a testbenches.
//
// exp_ref_bits() is a bit-exact model of the datapath written with plain
// 64-bit integer arithmetic, independent of the RTL's structure: table words
// are round(e^-v * 2^LUT_W), every "1 - v" is the 1's complement (2^F - 1 - v)
// and every product is truncated to the stated number of fractional bits.
// exp_ref_real() is the exact value e^-a that the result approximates.
package exp_ref_pkg;

  function automatic longint unsigned rnd_exp(real v, int unsigned frac);
    return longint'($rtoi($exp(-v) * (2.0 ** frac) + 0.5));
  endfunction

  // Series approximation of e^-(x*2^-pmax) for x < 2^(pmax-3);
  // result has mw fractional bits.
  function automatic longint unsigned series_ref(longint unsigned x, int unsigned pmax,
                                                 int unsigned cw, int unsigned sw,
                                                 int unsigned mw);
    longint unsigned s, sc, tc, pc, ts, ps;
    s  = (x / 4) + (x / 16);                              // 5x/16, pmax frac bits
    sc = (s << cw) >> pmax;                               // cw frac bits
    tc = ((64'd1 << cw) - 1) - sc;
    pc = ((x * tc) << sw) >> (pmax + cw + 1);             // (x/2)*Tc, sw frac bits
    ts = ((64'd1 << sw) - 1) - pc;
    ps = ((x * ts) << mw) >> (pmax + sw);                 // x*Ts, mw frac bits
    return ((64'd1 << mw) - 1) - ps;
  endfunction

  // Whole datapath: e^-(a*2^-p) returned with p fractional bits.
  function automatic longint unsigned exp_ref_bits(longint unsigned a, int unsigned p,
                                                   int unsigned pmax, int unsigned lw,
                                                   int unsigned mw, int unsigned cw,
                                                   int unsigned sw);
    longint unsigned al, ki, kf, x, l0, l1, m1, m2;
    if (p > pmax) p = pmax;
    if (a >= (longint'(16) << p)) al = (longint'(1) << (pmax + 4)) - 1;
    else                          al = a << (pmax - p);
    ki = al >> pmax;
    kf = (al >> (pmax - 3)) % 8;
    x  = al % (longint'(1) << (pmax - 3));
    l0 = rnd_exp(real'(ki), lw);
    l1 = rnd_exp(real'(kf) / 8.0, lw);
    m1 = ((l0 * l1) << mw) >> (2 * lw);
    m2 = (m1 * series_ref(x, pmax, cw, sw, mw)) >> mw;
    return m2 >> (mw - p);
  endfunction

  function automatic real exp_ref_real(longint unsigned a, int unsigned p);
    return $exp(-real'(a) / (2.0 ** p));
  endfunction

endpackage
