// tb_mx_pkg -- reference arithmetic for the MixDiT testbenches, written
// independently of the RTL helpers: MX element and binary32 decoding into
// 'real', random MX groups and random binary32 words.
package tb_mx_pkg;
  import mixdit_pkg::*;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // Value of element i of an MX group.
  function automatic real mx_val(mx_group_t g, int i);
    int  m  = (g.prec == MX9) ? 7 : 4;
    real v  = real'(g.mant[i]) * pow2(int'(g.exp) - 127 - int'(g.mu[i/2]) - (m - 1));
    return g.sign[i] ? -v : v;
  endfunction

  function automatic real fp32_val(logic [31:0] f);
    real v;
    if (f[30:23] == 0) return 0.0;
    v = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(int'(f[30:23]) - 127);
    return f[31] ? -v : v;
  endfunction

  function automatic real acc_val(acc_t a);
    return real'(a.m) * pow2(int'(a.e));
  endfunction

  // Random MX group; exponent in [elo, ehi]. Mantissas fill the format width.
  function automatic mx_group_t rand_group(mx_prec_e p, int elo, int ehi);
    mx_group_t g;
    int        m = (p == MX9) ? 7 : 4;
    g      = '0;
    g.prec = p;
    g.exp  = 8'(elo + int'($urandom_range(ehi - elo)));
    for (int s = 0; s < NSUB; s++) g.mu[s] = 1'($urandom);
    for (int i = 0; i < GROUP; i++) begin
      g.sign[i] = 1'($urandom);
      g.mant[i] = 7'($urandom_range((1 << m) - 1));
    end
    return g;
  endfunction

  function automatic real dot(mx_group_t a, mx_group_t w);
    real s = 0.0;
    for (int i = 0; i < GROUP; i++) s += mx_val(a, i) * mx_val(w, i);
    return s;
  endfunction

  function automatic real absdot(mx_group_t a, mx_group_t w);
    real s = 0.0, t;
    for (int i = 0; i < GROUP; i++) begin
      t = mx_val(a, i) * mx_val(w, i);
      s += (t < 0.0) ? -t : t;
    end
    return s;
  endfunction

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Random binary32 with exponent field in [elo, ehi] (elo > 0).
  function automatic logic [31:0] rand_fp32(int elo, int ehi);
    return {1'($urandom), 8'(elo + int'($urandom_range(ehi - elo))), 23'($urandom)};
  endfunction

  // Beat b of a group: four elements in narrow mode, one in wide mode.
  function automatic pe_beat_t beat_of(mx_group_t g, int b, bit wide, int nb);
    pe_beat_t r = '0;
    int e;
    r.valid = 1; r.first = (b == 0); r.last = (b == nb - 1); r.wide = wide;
    r.prec = g.prec; r.exp = g.exp;
    for (int l = 0; l < 4; l++) begin
      e = wide ? b : 4 * b + l;
      if (!wide || l == 0) begin
        r.sign[l] = g.sign[e]; r.mu[l] = g.mu[e/2]; r.mag[l] = g.mant[e];
      end
    end
    return r;
  endfunction

  // Allowed error of a binary32 result: truncation to 24 bits plus the
  // accumulator's rounding, relative to the sum of |products|.
  function automatic bit close(real got, real ref_v, real scale);
    return fabs(got - ref_v) <= fabs(ref_v) * 2.5e-7 + scale * 1e-7 + 1e-35;
  endfunction
endpackage
