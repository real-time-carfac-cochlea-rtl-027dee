// carfac_ref_pkg - testbench-side helpers: off-line coefficient design of a
// CARFAC filter bank (real arithmetic) and a sequential, sample-by-sample
// reference model of the fixed-point accelerator. The model processes one
// sample for all channels in plain loops, with no pipelining or
// time-multiplexing, and must agree bit for bit with the hardware.
package carfac_ref_pkg;
  import carfac_pkg::*;

  localparam real PI = 3.14159265358979;

  // exact DC gain of a CAR section (the division the hardware avoids)
  function automatic real exact_g(real a0, real c0, real h, real r);
    return (1.0 - 2.0 * a0 * r + r * r) / (1.0 - (2.0 * a0 - h * c0) * r + r * r);
  endfunction

  // Design the coefficients of channel ch of an n-channel bank:
  // pole frequencies spaced 0.5 ERB apart from 0.85 * fs/2 downwards,
  // min/max damping 0.10/0.35, zero ratio sqrt(2) (h = c0), and the
  // quadratic g(u) through the exact gain at u = 0, 0.5, 1.
  function automatic chan_coef_t design_channel(int ch);
    chan_coef_t c;
    real f, th, a0, c0, h, r1, drz, g0, g5, g1, ga, gb;
    f = 0.85 * FS_HZ / 2.0;
    for (int i = 0; i < ch; i++) f = f - 0.5 * (24.7 + f / 9.265);
    th  = 2.0 * PI * f / FS_HZ;
    a0  = $cos(th);
    c0  = $sin(th);
    h   = c0;
    r1  = 1.0 - 0.35 * th;
    drz = 0.25 * th;
    g0  = exact_g(a0, c0, h, r1);
    g5  = exact_g(a0, c0, h, r1 + 0.5 * drz);
    g1  = exact_g(a0, c0, h, r1 + drz);
    ga  = 2.0 * (g1 - 2.0 * g5 + g0);
    gb  = g1 - g0 - ga;
    c.a0 = r2c(a0); c.c0 = r2c(c0); c.h = r2c(h);
    c.r1 = r2c(r1); c.drz = r2c(drz);
    c.ga = r2c(ga); c.gb = r2c(gb); c.gc = r2c(g0);
    return c;
  endfunction

  function automatic coef_t coef_field(chan_coef_t c, coef_sel_e f);
    case (f)
      F_A0: return c.a0;  F_C0: return c.c0;  F_H: return c.h;
      F_R1: return c.r1;  F_DRZ: return c.drz; F_GA: return c.ga;
      F_GB: return c.gb;  default: return c.gc;
    endcase
  endfunction

  // ---- reference nonlinearities, written from the formulas ----
  function automatic sig_t ref_ihc(sig_t x, output logic clip);
    sig_t pi_, p;
    pi_ = sub(S_ONE, add(x, S_IHC_OFS) >>> 2);
    if (pi_ < 0) pi_ = 0;
    clip = (pi_ >= S_ONE);
    if (clip) p = S_ONE;
    else begin
      p = pi_;
      repeat (3) p = mul_ss(p, p);
    end
    return mul_sc(mul_ss(S_ONE - p, S_ONE - p), C_IHC_GAIN);
  endfunction

  function automatic sig_t ref_ohc(sig_t v, output logic clip);
    sig_t s, t;
    s = add(mul_sc(v, C_OHC_SCALE), S_OHC_OFS);
    t = sub(S_ONE, mul_ss(s, s) >>> 3);
    clip = (t < 0);
    if (clip) t = 0;
    repeat (3) t = mul_ss(t, t);
    return t;
  endfunction

  function automatic coef_t ref_gain(sig_t u, coef_t ga, coef_t gb, coef_t gc);
    sig_t t;
    t = add(mul_sc(u, ga), c2s(gb));
    return s2c(add(mul_ss(t, u), c2s(gc)));
  endfunction

  typedef struct {
    int   ch;
    sig_t y;
    sig_t ihc;
  } out_t;

  // ---- whole-bank sequential model ----
  class carfac_model;
    int         n;
    chan_coef_t cf [];
    sig_t  w0[], w1[], hlp[], q[], l1[], l2[];
    coef_t r[], g[];
    sig_t  acc[N_AGC][], st[N_AGC][];
    int    cnt;
    int    n_ihc_clip, n_ohc_clip;

    function new(int n_ch);
      n = n_ch;
      cf = new[n]; w0 = new[n]; w1 = new[n]; hlp = new[n]; q = new[n];
      l1 = new[n]; l2 = new[n]; r = new[n]; g = new[n];
      for (int k = 0; k < N_AGC; k++) begin acc[k] = new[n]; st[k] = new[n]; end
      for (int i = 0; i < n; i++) begin
        w0[i] = 0; w1[i] = 0; hlp[i] = 0; q[i] = 0; l1[i] = 0; l2[i] = 0;
        for (int k = 0; k < N_AGC; k++) begin acc[k][i] = 0; st[k][i] = 0; end
      end
      cnt = 0; n_ihc_clip = 0; n_ohc_clip = 0;
    endfunction

    function void set_coef(int ch, chan_coef_t c);
      cf[ch] = c; r[ch] = c.r1; g[ch] = c.gc;
    endfunction

    // process one input sample; results appended to outs
    function void step(logic signed [XW-1:0] xs, ref out_t outs[$]);
      sig_t in_, w0o, w1o, w0n, w1n, y, hp, vm, rel, rel20, omb, v, nl, u;
      sig_t t [];
      logic c1;
      in_ = sig_t'(xs) <<< 1;
      for (int ch = 0; ch < n; ch++) begin
        w0o = w0[ch]; w1o = w1[ch];
        w0n = add(mul_sc(sub(mul_sc(w0o, cf[ch].a0), mul_sc(w1o, cf[ch].c0)), r[ch]), in_);
        w1n = mul_sc(add(mul_sc(w0o, cf[ch].c0), mul_sc(w1o, cf[ch].a0)), r[ch]);
        y   = mul_sc(add(in_, mul_sc(w1n, cf[ch].h)), g[ch]);
        w0[ch] = w0n; w1[ch] = w1n; in_ = y;
        // DIHC
        hp = sub(y, hlp[ch]);
        hlp[ch] = add(hlp[ch], mul_sc(hp, C_IHC_HPF));
        vm = ref_ihc(hp, c1); n_ihc_clip += int'(c1);
        rel = mul_ss(vm, sub(S_ONE, q[ch]));
        rel20 = add(rel * 16, rel * 4);
        q[ch]  = add(q[ch], mul_sc(sub(rel20, q[ch]), C_IHC_Q));
        l1[ch] = add(l1[ch], mul_sc(sub(rel, l1[ch]), C_IHC_LPF));
        l2[ch] = add(l2[ch], mul_sc(sub(l1[ch], l2[ch]), C_IHC_LPF));
        // AGC accumulate, b fetch
        for (int k = 0; k < N_AGC; k++) acc[k][ch] = add(acc[k][ch], l2[ch]);
        omb = clamp01(sub(S_ONE, st[0][ch]));
        // DOHC
        v  = sub(w1n, w1o);
        nl = ref_ohc(v, c1); n_ohc_clip += int'(c1);
        u  = mul_ss(omb, nl);
        r[ch] = s2c(add(c2s(cf[ch].r1), mul_sc(u, cf[ch].drz)));
        g[ch] = ref_gain(u, cf[ch].ga, cf[ch].gb, cf[ch].gc);
        outs.push_back('{ch: ch, y: y, ihc: l2[ch]});
      end
      // AGC stage updates, slowest first
      cnt = (cnt + 1) % 64;
      t = new[n];
      for (int k = N_AGC - 1; k >= 0; k--) begin
        if (cnt % (AGC_DECIM0 << k) != 0) continue;
        for (int j = 0; j < n; j++) begin
          sig_t a, sl;
          a  = acc[k][j] >>> (3 + k);
          sl = (k == N_AGC - 1) ? 0 : st[k+1][j];
          t[j] = add(mul_sc(add(add(a, sl), sl), agc_ct(k)), mul_sc(st[k][j], C_ONE - agc_ct(k)));
          acc[k][j] = 0;
        end
        for (int j = 0; j < n; j++) begin
          sig_t lf, rt;
          lf = (j == 0) ? t[j] : t[j-1];
          rt = (j == n - 1) ? t[j] : t[j+1];
          st[k][j] = add(add(mul_sc(lf, C_AGC_S1), mul_sc(t[j], C_ONE - C_AGC_S1 - C_AGC_S2)),
                         mul_sc(rt, C_AGC_S2));
        end
      end
    endfunction
  endclass
endpackage
