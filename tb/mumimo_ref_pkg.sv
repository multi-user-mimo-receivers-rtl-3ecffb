// Reference model for the MU-MIMO receiver testbenches, written separately
// from the RTL: constellation points come from explicit LTE level tables, the
// inner minimisation over the interferer's symbols is an exhaustive search,
// and all arithmetic is done on 128-bit integers. Also generates random tones
// y = h1 x1 + h2 x2 + n.
package mumimo_ref_pkg;
  import mumimo_pkg::*;

  typedef logic signed [127:0] wide_t;

  // odd level of one dimension, indexed by {sign, m1, m2}
  function automatic int ref_odd(int bits, logic s, logic m1, logic m2);
    int t16 [4] = '{1, 3, -1, -3};                    // index {s, m1}
    int t64 [8] = '{3, 1, 5, 7, -3, -1, -5, -7};      // index {s, m1, m2}
    case (bits)
      2: return s ? -1 : 1;
      4: return t16[{s, m1}];
      6: return t64[{s, m1, m2}];
      default: return 0;
    endcase
  endfunction

  function automatic int ref_bits(mod_e m);
    return (m == MOD_QAM4) ? 2 : (m == MOD_QAM16) ? 4 : (m == MOD_QAM64) ? 6 : 0;
  endfunction

  function automatic int ref_scale(mod_e m);
    real e;
    e = (m == MOD_QAM4) ? 2.0 : (m == MOD_QAM16) ? 10.0 : 42.0;
    return (m == MOD_NONE) ? 0 : int'($floor(4096.0 / $sqrt(e) + 0.5));
  endfunction

  function automatic void ref_point(mod_e m, int k, output int re, output int im);
    int b = ref_bits(m);
    int sc = ref_scale(m);
    re = sc * ref_odd(b, k[0], k[2], k[4]);
    im = sc * ref_odd(b, k[1], k[3], k[5]);
  endfunction

  // |y - h1 x1 - h2 x2|^2 with 48 fraction bits, exact
  function automatic wide_t ref_e2(tone_t t, mod_e ms, int k1, mod_e mi, int k2);
    int x1r, x1i, x2r, x2i;
    wide_t er, ei, acc;
    ref_point(ms, k1, x1r, x1i);
    if (mi == MOD_NONE) begin x2r = 0; x2i = 0; end
    else ref_point(mi, k2, x2r, x2i);
    acc = 0;
    for (int a = 0; a < 2; a++) begin
      er = wide_t'(t.y[a].re) * 4096
         - (wide_t'(t.h1[a].re) * x1r - wide_t'(t.h1[a].im) * x1i)
         - (wide_t'(t.h2[a].re) * x2r - wide_t'(t.h2[a].im) * x2i);
      ei = wide_t'(t.y[a].im) * 4096
         - (wide_t'(t.h1[a].re) * x1i + wide_t'(t.h1[a].im) * x1r)
         - (wide_t'(t.h2[a].re) * x2i + wide_t'(t.h2[a].im) * x2r);
      acc += er * er + ei * ei;
    end
    return acc;
  endfunction

  // distance metric: |e|^2 / sigma^2 in 8 fraction bits, floor, saturated
  function automatic int unsigned ref_metric(tone_t t, wide_t e2);
    wide_t d;
    d = (e2 * wide_t'(t.inv_nv)) >>> 48;
    return (d > wide_t'(24'hFFFFFF)) ? 32'hFFFFFF : int'(d);
  endfunction

  function automatic int unsigned ref_pair(tone_t t, mod_e ms, int k1, mod_e mi, int k2);
    return ref_metric(t, ref_e2(t, ms, k1, mi, k2));
  endfunction

  // min over x2 of the metric for desired symbol k1 (exhaustive search)
  function automatic int unsigned ref_min_x2(tone_t t, mod_e ms, int k1, mod_e mi);
    int unsigned best, d;
    int n2 = (mi == MOD_NONE) ? 1 : (1 << ref_bits(mi));
    best = 32'hFFFFFFFF;
    for (int k2 = 0; k2 < n2; k2++) begin
      d = ref_pair(t, ms, k1, mi, k2);
      if (d < best) best = d;
    end
    return best;
  endfunction

  // max-log LLR of bit j: min over bit=1 minus min over bit=0
  function automatic int ref_llr(int unsigned dl [64], mod_e ms, int j);
    int unsigned m0, m1;
    m0 = 32'hFFFFFFFF;
    m1 = 32'hFFFFFFFF;
    for (int k = 0; k < (1 << ref_bits(ms)); k++)
      if (k[j]) begin if (dl[k] < m1) m1 = dl[k]; end
      else      begin if (dl[k] < m0) m0 = dl[k]; end
    return int'(m1) - int'(m0);
  endfunction

  function automatic int rnd_range(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // Random tone: channel entries uniform in [-1, 1), symbols k1 of ms and k2
  // of mi_true (absent if MOD_NONE), noise uniform in [-nmax, nmax] (Q12).
  function automatic tone_t gen_tone(mod_e ms, mod_e mi_true, int k1, int k2,
                                     int nmax, int unsigned inv_nv);
    tone_t t;
    int x1r, x1i, x2r, x2i;
    longint yr, yi;
    ref_point(ms, k1, x1r, x1i);
    if (mi_true == MOD_NONE) begin x2r = 0; x2i = 0; end
    else ref_point(mi_true, k2, x2r, x2i);
    for (int a = 0; a < 2; a++) begin
      t.h1[a].re = 16'(rnd_range(-4096, 4095));
      t.h1[a].im = 16'(rnd_range(-4096, 4095));
      t.h2[a].re = 16'(rnd_range(-4096, 4095));
      t.h2[a].im = 16'(rnd_range(-4096, 4095));
    end
    for (int a = 0; a < 2; a++) begin
      yr = (longint'(t.h1[a].re) * x1r - longint'(t.h1[a].im) * x1i
          + longint'(t.h2[a].re) * x2r - longint'(t.h2[a].im) * x2i) >>> 12;
      yi = (longint'(t.h1[a].re) * x1i + longint'(t.h1[a].im) * x1r
          + longint'(t.h2[a].re) * x2i + longint'(t.h2[a].im) * x2r) >>> 12;
      t.y[a].re = 16'(yr + rnd_range(-nmax, nmax));
      t.y[a].im = 16'(yi + rnd_range(-nmax, nmax));
    end
    t.inv_nv = 16'(inv_nv);
    return t;
  endfunction

endpackage
