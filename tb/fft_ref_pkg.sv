// fft_ref_pkg: reference models for the testbenches of the 8-point
// radix-2^2 SDF FFT.
//
// Everything here works on plain integers and reals, frame at a time, not
// on the streaming hardware structure:
//   ds_ref    digit-slicing product from its defining sum
//             sum_k (A_k * B) * 2^(4k-9), each right-shifted term floored
//   tw_ref    twiddle ROM word computed from cos/sin
//   cmul_ref  three-multiplier complex product with the halved pre-sums
//   fft8_ref  the flow graph of the 8-point radix-2^2 DIF FFT, stage by stage
//   dft8      floating point DFT / 8, for a tolerance check
package fft_ref_pkg;

  typedef struct {
    int re;
    int im;
  } ci_t;

  function automatic int sat16(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic int hadd(int a, int b);
    return (a + b + 1) >>> 1;
  endfunction

  function automatic int hsub(int a, int b);
    return sat16((a - b + 1) >>> 1);
  endfunction

  // A: 16-bit two's complement value, B: Q1.9 constant.
  function automatic int ds_ref(int a, int b);
    int a3, a2, a1, a0;
    a3 = a >>> 12;          // signed top slice, -8..7
    a2 = (a >>> 8) & 15;
    a1 = (a >>> 4) & 15;
    a0 = a & 15;
    return (a3 * b) * 8 + ((a2 * b) >>> 1) + ((a1 * b) >>> 5) + ((a0 * b) >>> 9);
  endfunction

  // W8^e as stored: round(32768*c) clipped to 32767, then >>> 6.
  function automatic ci_t tw_ref(int e);
    real  ang, c, s;
    int   qc, qs;
    ci_t  w;
    ang = 2.0 * 3.14159265358979323846 * real'(e) / 8.0;
    c   = $cos(ang);
    s   = -$sin(ang);
    qc  = int'($floor(32768.0 * c + 0.5));
    qs  = int'($floor(32768.0 * s + 0.5));
    if (qc > 32767) qc = 32767;
    if (qs > 32767) qs = 32767;
    w.re = qc >>> 6;
    w.im = qs >>> 6;
    return w;
  endfunction

  function automatic ci_t cmul_ref(ci_t a, ci_t w);
    int  dh, sh, bd, t1, t2, t3;
    ci_t r;
    dh = (a.re - a.im) >>> 1;
    sh = (a.re + a.im) >>> 1;
    bd = w.re - w.im;
    t1 = ds_ref(dh, w.re);
    t2 = ds_ref(a.im, bd);
    t3 = ds_ref(sh, w.im);
    r.re = sat16(2 * t1 + t2);
    r.im = sat16(2 * t3 + t2);
    return r;
  endfunction

  // Bit-exact model: returns results in output (bit-reversed) order.
  function automatic void fft8_ref(input ci_t x[8], output ci_t y[8]);
    ci_t s1[8], s2[8], s3[8];
    ci_t b;
    int  e[8] = '{0, 0, 0, 2, 0, 1, 0, 3};
    // Butterfly I, span 4.
    for (int n = 0; n < 4; n++) begin
      s1[n].re   = hadd(x[n].re, x[n+4].re);  s1[n].im   = hadd(x[n].im, x[n+4].im);
      s1[n+4].re = hsub(x[n].re, x[n+4].re);  s1[n+4].im = hsub(x[n].im, x[n+4].im);
    end
    // Butterfly II, span 2, -j on the last quarter.
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < 2; i++) begin
        b = s1[4*h+i+2];
        if (h == 1) begin
          int t;
          t = b.re; b.re = b.im; b.im = -t;
        end
        s2[4*h+i].re   = hadd(s1[4*h+i].re, b.re);  s2[4*h+i].im   = hadd(s1[4*h+i].im, b.im);
        s2[4*h+i+2].re = hsub(s1[4*h+i].re, b.re);  s2[4*h+i+2].im = hsub(s1[4*h+i].im, b.im);
      end
    // Twiddles.
    for (int i = 0; i < 8; i++) s3[i] = cmul_ref(s2[i], tw_ref(e[i]));
    // Butterfly I, span 1.
    for (int p = 0; p < 4; p++) begin
      y[2*p].re   = hadd(s3[2*p].re, s3[2*p+1].re);  y[2*p].im   = hadd(s3[2*p].im, s3[2*p+1].im);
      y[2*p+1].re = hsub(s3[2*p].re, s3[2*p+1].re);  y[2*p+1].im = hsub(s3[2*p].im, s3[2*p+1].im);
    end
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int bitrev3(int i);
    return ((i & 1) << 2) | (i & 2) | ((i >> 2) & 1);
  endfunction

  // Floating point DFT / 8, in natural order, in LSB units.
  function automatic void dft8(input ci_t x[8], output real yr[8], output real yi[8]);
    real ang;
    for (int k = 0; k < 8; k++) begin
      yr[k] = 0.0; yi[k] = 0.0;
      for (int n = 0; n < 8; n++) begin
        ang = -2.0 * 3.14159265358979323846 * real'(n * k) / 8.0;
        yr[k] += real'(x[n].re) * $cos(ang) - real'(x[n].im) * $sin(ang);
        yi[k] += real'(x[n].re) * $sin(ang) + real'(x[n].im) * $cos(ang);
      end
      yr[k] /= 8.0; yi[k] /= 8.0;
    end
  endfunction

endpackage
