// fe_ref_pkg: reference model of the ASAP-FE feature extractor, used by the
// testbenches to compute expected values without the RTL.
//
// It contains
//   * coefficient design for the test filters: each 4th-order band-pass is a
//     2nd-order resonator (audio-EQ-cookbook constant-peak band-pass) applied
//     twice, with centre frequencies spaced evenly on the mel scale between
//     100 Hz and 7 kHz; the anti-alias low-pass is a squared 2nd-order
//     low-pass at 3.4 kHz; pre-emphasis is y[n] = x[n] - 0.97 x[n-1]. All
//     are quantised to the signed Q4.28 coefficient format;
//   * a bit-exact model of one filter run (LShift, IIR, RShift, saturation);
//   * the frame statistics and stride rule, the priority queue, the log2
//     feature and the stride-2 realignment, each written from the written
//     specification of the block rather than from its RTL.
package fe_ref_pkg;

  localparam int ALPHA = 8;
  localparam int CFRAC = 28;
  localparam int Y_W   = 40;

  typedef longint coefs_t [9];   // b0..b4, a1..a4 (Q4.28)

  function automatic longint qcoef(input real v);
    real s;
    s = v * (2.0 ** CFRAC);
    return longint'(s < 0.0 ? s - 0.5 : s + 0.5);
  endfunction

  // Square a biquad (b0 b1 b2 / 1 a1 a2) into a 4th-order section.
  function automatic coefs_t square_biquad(input real b[3], input real a[3]);
    real bb[5], aa[5];
    coefs_t c;
    for (int i = 0; i < 5; i++) begin bb[i] = 0.0; aa[i] = 0.0; end
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        bb[i+j] += b[i] * b[j];
        aa[i+j] += a[i] * a[j];
      end
    for (int i = 0; i < 5; i++) c[i] = qcoef(bb[i]);
    for (int i = 1; i < 5; i++) c[4+i] = qcoef(aa[i]);
    return c;
  endfunction

  function automatic real mel(input real f);
    return 2595.0 * $log10(1.0 + f / 700.0);
  endfunction
  function automatic real imel(input real m);
    return 700.0 * ((10.0 ** (m / 2595.0)) - 1.0);
  endfunction

  // Band-pass for band `band` of `nb`, designed at sample rate fs.
  function automatic coefs_t bpf(input int band, input int nb, input real fs);
    real pi, f0, w0, q, alpha, bw_mel, b[3], a[3], a0;
    pi = 3.14159265358979;
    bw_mel = (mel(7000.0) - mel(100.0)) / real'(nb + 1);
    f0 = imel(mel(100.0) + bw_mel * real'(band + 1));
    if (f0 > 0.45 * fs) f0 = 0.45 * fs;
    q  = 4.0;
    w0 = 2.0 * pi * f0 / fs;
    alpha = $sin(w0) / (2.0 * q);
    a0 = 1.0 + alpha;
    b[0] = alpha / a0; b[1] = 0.0; b[2] = -alpha / a0;
    a[0] = 1.0; a[1] = -2.0 * $cos(w0) / a0; a[2] = (1.0 - alpha) / a0;
    return square_biquad(b, a);
  endfunction

  function automatic coefs_t lpf();
    real pi, w0, q, alpha, b[3], a[3], a0, cw;
    pi = 3.14159265358979;
    w0 = 2.0 * pi * 3400.0 / 16000.0;
    q  = 0.7071;
    cw = $cos(w0);
    alpha = $sin(w0) / (2.0 * q);
    a0 = 1.0 + alpha;
    b[0] = (1.0 - cw) / 2.0 / a0; b[1] = (1.0 - cw) / a0; b[2] = b[0];
    a[0] = 1.0; a[1] = -2.0 * cw / a0; a[2] = (1.0 - alpha) / a0;
    return square_biquad(b, a);
  endfunction

  function automatic coefs_t preemph();
    coefs_t c;
    foreach (c[i]) c[i] = 0;
    c[0] = qcoef(1.0);
    c[1] = qcoef(-0.97);
    return c;
  endfunction

  // Coefficient set `s` of a bank with nb bands (numbering as in the RTL map).
  function automatic coefs_t coef_set(input int s, input int nb);
    if (s < nb)          return bpf(s, nb, 16000.0);
    else if (s < 2 * nb) return bpf(s - nb, nb, 8000.0);
    else if (s == 2 * nb) return lpf();
    else                 return preemph();
  endfunction

  // ---------------------------------------------------------------- filter
  function automatic logic signed [127:0] clampw(input logic signed [127:0] v, input int w);
    logic signed [127:0] mx, mn;
    mx = (128'sd1 <<< (w - 1)) - 1;
    mn = -(128'sd1 <<< (w - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  // Run the fixed-point 4th-order IIR from zero state over x; outputs are the
  // 16-bit integers after RShift.
  function automatic void run_iir(input coefs_t c, input int x[$], output int y[$]);
    logic signed [127:0] xs[5], ys[5], acc;
    y = {};
    for (int k = 0; k < 5; k++) begin xs[k] = 0; ys[k] = 0; end
    foreach (x[n]) begin
      for (int k = 4; k > 0; k--) begin xs[k] = xs[k-1]; ys[k] = ys[k-1]; end
      xs[0] = 128'(x[n]) * 256;   // 2^ALPHA
      acc = 0;
      for (int k = 0; k < 5; k++) acc += 128'(c[k]) * xs[k];
      for (int k = 1; k < 5; k++) acc -= 128'(c[4+k]) * ys[k];
      ys[0] = clampw(acc >>> CFRAC, Y_W);
      y.push_back(int'(clampw(ys[0] >>> ALPHA, 16)));
    end
  endfunction

  function automatic longint energy(input int y[$]);
    longint e;
    e = 0;
    foreach (y[i]) e += longint'(y[i]) * longint'(y[i]);
    return e;
  endfunction

  // ---------------------------------------------------------------- log2
  function automatic int log2_feat(input longint e);
    int p, m;
    real frac;
    if (e <= 0) return 0;
    p = 0;
    while ((e >> (p + 1)) != 0) p++;
    if (p >= 4) m = int'((e >> (p - 4)) & 15);
    else        m = int'((e << (4 - p)) & 15);
    frac = $ln(1.0 + real'(m) / 16.0) / $ln(2.0) * 256.0;
    return p * 256 + int'($floor(frac + 0.5));
  endfunction

  // ---------------------------------------------------------------- strides
  // Frame statistics and strides (0 skip, 1, 2) of a pre-emphasized clip.
  function automatic void strides_of(input int x[$], input int flen, input int hop,
                                     output int st[$]);
    int nf;
    longint ste[$], s2[$], mste, ms2;
    nf = (x.size() - flen) / hop + 1;
    mste = 0; ms2 = 0;
    for (int f = 0; f < nf; f++) begin
      longint e; int z, mx, mn;
      e = 0; z = 0; mx = -40000; mn = 40000;
      for (int i = 0; i < flen; i++) begin
        int v;
        v = x[f*hop+i];
        e += longint'(v) * v;
        if (v > mx) mx = v;
        if (v < mn) mn = v;
        if (i > 0 && ((v > 0 && x[f*hop+i-1] < 0) || (v < 0 && x[f*hop+i-1] > 0))) z++;
      end
      ste.push_back(e);
      s2.push_back(2 * z + (mx - mn));
      if (e > mste) mste = e;
      if (2 * z + (mx - mn) > ms2) ms2 = 2 * z + (mx - mn);
    end
    st = {};
    for (int f = 0; f < nf; f++) begin
      // STE < max/64 -> skip; S < max/2 -> stride 2
      if (real'(ste[f]) < real'(mste) / 64.0)   st.push_back(0);
      else if (real'(s2[f]) < real'(ms2) / 2.0) st.push_back(2);
      else                                     st.push_back(1);
    end
  endfunction

  // Priority queue as (kind, frame) pairs; kind 1 = S1, 2 = S2, 3 = S2 calibration.
  function automatic void priority_queue(input int st[$], output int kinds[$], output int frames[$]);
    int p1k[$], p1f[$], p2f[$], p3f[$];
    for (int f = 0; f < st.size(); f++) begin
      bit nb2;
      nb2 = (f > 0 && st[f-1] == 2) || (f < st.size() - 1 && st[f+1] == 2);
      if (st[f] == 1 && nb2) begin
        p1k.push_back(3); p1f.push_back(f);
        p1k.push_back(1); p1f.push_back(f);
      end else if (st[f] == 2) p2f.push_back(f);
      else if (st[f] == 1)     p3f.push_back(f);
    end
    kinds = p1k; frames = p1f;
    foreach (p2f[i]) begin kinds.push_back(2); frames.push_back(p2f[i]); end
    foreach (p3f[i]) begin kinds.push_back(1); frames.push_back(p3f[i]); end
  endfunction

  // ---------------------------------------------------------------- whole pass
  // Features [frame*nb + band] after realignment, and per-frame strides.
  function automatic void extract(input int raw[$], input int flen, input int hop, input int nb,
                                  output int pre[$], output int st[$], output int feat[$]);
    int nf, y[$], fr[$], lp[$], dec[$];
    int f1[$], f2cal[$];
    nf = (raw.size() - flen) / hop + 1;
    run_iir(coef_set(2 * nb + 1, nb), raw, pre);
    strides_of(pre, flen, hop, st);
    feat = {}; f1 = {}; f2cal = {};
    for (int i = 0; i < nf * nb; i++) begin feat.push_back(0); f2cal.push_back(0); end
    for (int f = 0; f < nf; f++) begin
      bit nb2;
      nb2 = (f > 0 && st[f-1] == 2) || (f < nf - 1 && st[f+1] == 2);
      if (st[f] == 1) begin
        fr = {};
        for (int i = 0; i < flen; i++) fr.push_back(pre[f*hop+i]);
        for (int b = 0; b < nb; b++) begin
          run_iir(coef_set(b, nb), fr, y);
          feat[f*nb+b] = log2_feat(energy(y));
        end
      end
      if (st[f] == 2 || (st[f] == 1 && nb2)) begin
        fr = {};
        for (int i = 0; i < flen; i++) fr.push_back(raw[f*hop+i]);
        run_iir(coef_set(2 * nb, nb), fr, lp);
        dec = {};
        for (int i = 0; i < flen; i += 2) dec.push_back(lp[i]);
        for (int b = 0; b < nb; b++) begin
          run_iir(coef_set(nb + b, nb), dec, y);
          if (st[f] == 2) feat[f*nb+b]  = log2_feat(energy(y));
          else            f2cal[f*nb+b] = log2_feat(energy(y));
        end
      end
    end
    // realignment of stride-2 frames
    for (int f = 0; f < nf; f++) begin
      if (st[f] == 2) begin
        int l, r, rf;
        l = f - 1; while (l >= 0 && st[l] == 2) l--;
        r = f + 1; while (r < nf && st[r] == 2) r++;
        rf = -1;
        if (l >= 0 && st[l] == 1)      rf = l;
        else if (r < nf && st[r] == 1) rf = r;
        for (int b = 0; b < nb; b++) begin
          int v;
          if (rf >= 0) v = feat[f*nb+b] + feat[rf*nb+b] - f2cal[rf*nb+b];
          else         v = feat[f*nb+b] + 256;
          feat[f*nb+b] = (v < 0) ? 0 : (v > 65535) ? 65535 : v;
        end
      end
    end
  endfunction

  // A test clip: silence with low noise, a voiced burst and a noisy burst.
  function automatic void make_clip(input int n, input int seed, output int x[$]);
    int s;
    real pi;
    pi = 3.14159265358979;
    s = seed;
    x = {};
    for (int i = 0; i < n; i++) begin
      real v, ph;
      int  r;
      s = s * 1103515245 + 12345;
      r = (s >>> 16) % 64;
      ph = real'(i) / real'(n);
      if (ph > 0.2 && ph < 0.45)
        v = 6000.0 * $sin(2.0 * pi * 300.0 * real'(i) / 16000.0)
          + 2500.0 * $sin(2.0 * pi * 1200.0 * real'(i) / 16000.0) + real'(r) * 20.0;
      else if (ph > 0.6 && ph < 0.8)
        v = 3000.0 * $sin(2.0 * pi * 3100.0 * real'(i) / 16000.0) + real'(r) * 60.0;
      else
        v = real'(r) - 32.0;
      x.push_back(int'(v));
    end
  endfunction

endpackage
