// ellora_ref_pkg: reference models used by the testbenches of the IFFT core.
//
// These are written independently of the RTL, with plain integer and real
// arithmetic: a bit-exact model of one butterfly (Q1.14 twiddles, products
// shifted right by 15, Xa shifted right by 1, 17-bit sums saturated to 16
// bits), a model of the twiddle table, a whole in-place decimation-in-time
// IFFT written as the textbook triple loop, and a floating-point inverse DFT
// for accuracy checks.
package ellora_ref_pkg;

  typedef struct {
    int re;
    int im;
  } ci_t;

  int unsigned sat_count;  // saturations seen by the models since last clear

  function automatic int sat16(longint v);
    if (v > 32767) begin
      sat_count++;
      return 32767;
    end
    if (v < -32768) begin
      sat_count++;
      return -32768;
    end
    return int'(v);
  endfunction

  function automatic int q14(real v);
    real s;
    s = v * 16384.0;
    if (s >= 0.0) return $rtoi(s + 0.5);
    return -$rtoi(-s + 0.5);
  endfunction

  function automatic ci_t twiddle(int k, int n);
    ci_t w;
    real ang;
    ang = 2.0 * 3.14159265358979323846 * real'(k) / real'(n);
    w.re = q14($cos(ang));
    w.im = q14($sin(ang));
    return w;
  endfunction

  // Floor division by 2^sh for signed values (arithmetic shift).
  function automatic longint asr(longint v, int sh);
    return v >>> sh;
  endfunction

  function automatic void bfly(input ci_t xa, input ci_t xb, input ci_t w,
                               output ci_t ya, output ci_t yb);
    int pr, pi, ar, ai;
    pr = sat16(asr(longint'(xb.re) * w.re, 15) - asr(longint'(xb.im) * w.im, 15));
    pi = sat16(asr(longint'(xb.re) * w.im, 15) + asr(longint'(xb.im) * w.re, 15));
    ar = int'(asr(xa.re, 1));
    ai = int'(asr(xa.im, 1));
    ya.re = sat16(longint'(ar) + pr);
    ya.im = sat16(longint'(ai) + pi);
    yb.re = sat16(longint'(ar) - pr);
    yb.im = sat16(longint'(ai) - pi);
  endfunction

  function automatic int rev(int v, int bits);
    int r;
    r = 0;
    for (int b = 0; b < bits; b++) r = (r << 1) | ((v >> b) & 1);
    return r;
  endfunction

  // Bit-exact fixed-point IFFT: natural-order input, natural-order output.
  function automatic void ifft_fixed(input int n, input ci_t x [], output ci_t y []);
    int bits;
    ci_t a, b;
    bits = $clog2(n);
    y = new[n];
    for (int i = 0; i < n; i++) y[rev(i, bits)] = x[i];
    for (int size = 2; size <= n; size *= 2) begin
      for (int base = 0; base < n; base += size) begin
        for (int m = 0; m < size / 2; m++) begin
          bfly(y[base + m], y[base + m + size / 2], twiddle(m * (n / size), n), a, b);
          y[base + m] = a;
          y[base + m + size / 2] = b;
        end
      end
    end
  endfunction

  // Floating-point inverse DFT with the 1/N factor, rounded to integers.
  function automatic void idft_real(input int n, input ci_t x [], output real yr [], output real yi []);
    yr = new[n];
    yi = new[n];
    for (int t = 0; t < n; t++) begin
      real sr, si, ang;
      sr = 0.0;
      si = 0.0;
      for (int k = 0; k < n; k++) begin
        ang = 2.0 * 3.14159265358979323846 * real'((k * t) % n) / real'(n);
        sr += real'(x[k].re) * $cos(ang) - real'(x[k].im) * $sin(ang);
        si += real'(x[k].re) * $sin(ang) + real'(x[k].im) * $cos(ang);
      end
      yr[t] = sr / real'(n);
      yi[t] = si / real'(n);
    end
  endfunction

endpackage
