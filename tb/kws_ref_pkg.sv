// kws_ref_pkg: reference model of the feature extraction arithmetic, used by
// the testbenches. It recomputes every coefficient table from its formula
// and processes whole frames with plain loops, in the textbook order
// (filter-major Mel sums, in-place decimation-in-frequency FFT), so that it
// shares no structure with the streaming hardware.
package kws_ref_pkg;

  localparam int N = 128;
  localparam int NB = 65;
  localparam int M = 20;
  localparam int NC = 12;
  localparam real PI = 3.14159265358979323846;

  typedef int frame_t [N];

  function automatic int rnd(real x);
    return int'($floor(x + 0.5));
  endfunction

  function automatic int sat(longint v, int bits);
    longint hi = (longint'(1) <<< (bits - 1)) - 1;
    longint lo = -(longint'(1) <<< (bits - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  function automatic int hamming(int n);
    return rnd(32767.0 * (0.54 - 0.46 * $cos(2.0 * PI * n / (N - 1))));
  endfunction

  function automatic int tw_c(int t);
    return rnd(32767.0 * $cos(2.0 * PI * t / N));
  endfunction

  function automatic int tw_d(int t);
    return rnd(-32767.0 * $sin(2.0 * PI * t / N));
  endfunction

  function automatic int dct_c(int k, int n);
    return rnd(127.0 * $cos(PI * (k + 1) * (n + 0.5) / M));
  endfunction

  // Mel points in FFT bins.
  function automatic void mel_points(output int p [M+2]);
    real mx = 2595.0 * $log10(1.0 + 4000.0 / 700.0);
    for (int i = 0; i < M + 2; i++) begin
      real hz = 700.0 * ($pow(10.0, (mx * i / (M + 1)) / 2595.0) - 1.0);
      p[i] = int'($floor(129.0 * hz / 8000.0));
      if (i > 0 && p[i] <= p[i-1]) p[i] = p[i-1] + 1;
    end
  endfunction

  // Weight of filter f (0-based) at bin b, 255 = 1.0.
  function automatic int mel_w(int f, int b);
    int p [M+2];
    real w;
    int v;
    mel_points(p);
    if (b < p[f] || b >= p[f+2]) return 0;
    if (b < p[f+1]) w = real'(b - p[f]) / real'(p[f+1] - p[f]);
    else            w = real'(p[f+2] - b) / real'(p[f+2] - p[f+1]);
    v = rnd(w * 255.0);
    return (v > 255) ? 255 : v;
  endfunction

  function automatic frame_t preemph(frame_t x);
    frame_t y;
    for (int n = 0; n < N; n++) begin
      longint a = (n == 0) ? 0 : ((longint'(x[n-1]) * 31) >>> 5);
      y[n] = sat(longint'(x[n]) - a, 16);
    end
    return y;
  endfunction

  function automatic frame_t window(frame_t x);
    frame_t y;
    for (int n = 0; n < N; n++) y[n] = int'((longint'(x[n]) * hamming(n)) >>> 15);
    return y;
  endfunction

  // Scaled DIF FFT, in place, then bit reversal.
  function automatic void fft(input frame_t x, output frame_t re, output frame_t im);
    frame_t r, i2;
    for (int n = 0; n < N; n++) begin r[n] = x[n]; i2[n] = 0; end
    for (int s = 1; s <= 7; s++) begin
      int h = N >> s;
      for (int g = 0; g < N; g += 2 * h) begin
        for (int k = 0; k < h; k++) begin
          int a = g + k, b = g + k + h;
          int sr = (r[a] + r[b]) >>> 1, si = (i2[a] + i2[b]) >>> 1;
          int dr = (r[a] - r[b]) >>> 1, di = (i2[a] - i2[b]) >>> 1;
          int t = k << (s - 1);
          r[a] = sr; i2[a] = si;
          if (h >= 4) begin
            r[b]  = int'((longint'(dr) * tw_c(t) - longint'(di) * tw_d(t)) >>> 15);
            i2[b] = int'((longint'(dr) * tw_d(t) + longint'(di) * tw_c(t)) >>> 15);
          end else if (h == 2 && k == 1) begin
            r[b] = di; i2[b] = -dr;
          end else begin
            r[b] = dr; i2[b] = di;
          end
        end
      end
    end
    for (int n = 0; n < N; n++) begin
      int rv = 0;
      for (int q = 0; q < 7; q++) rv |= ((n >> q) & 1) << (6 - q);
      re[n] = r[rv]; im[n] = i2[rv];
    end
  endfunction

  function automatic longint power(int re, int im);
    longint p = longint'(re) * re + longint'(im) * im;
    return (p > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : p;
  endfunction

  function automatic longint mel(longint p [N], int f);
    longint acc = 0;
    for (int b = 0; b < NB; b++) acc += p[b] * mel_w(f, b);
    acc = acc >> 8;
    return (acc > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : acc;
  endfunction

  function automatic int log2i(longint x);
    int n = 0;
    while (x > 0) begin n++; x = x >> 1; end
    return n;
  endfunction

  function automatic int dct(int lg [M], int k);
    longint acc = 0;
    for (int n = 0; n < M; n++) acc += longint'(dct_c(k, n)) * lg[n];
    return sat(acc >>> 6, 8);
  endfunction

  // Whole chain for one frame of 16-bit samples.
  function automatic void mfcc(input frame_t x, output int c [NC]);
    frame_t re, im;
    longint p [N];
    int lg [M];
    fft(window(preemph(x)), re, im);
    for (int b = 0; b < N; b++) p[b] = power(re[b], im[b]);
    for (int f = 0; f < M; f++) lg[f] = log2i(mel(p, f));
    for (int k = 0; k < NC; k++) c[k] = dct(lg, k);
  endfunction

endpackage
