// msld_ref -- behavioural reference model of the MSLD arithmetic, used by the
// testbenches to compute expected values independently of the RTL.
//
// Line geometry is computed here with real-valued cos/sin (the RTL uses a
// 16-bit table); sums are formed directly rather than by reusing smaller
// scales; statistics use 128-bit integers and a binary-search square root.
// The fixed-point conventions (FRAC = 18 fractional bits, floor reciprocals
// floor(2^18/n), mean truncated toward zero, floor shifts, saturation) are the
// design's documented number formats.
package msld_ref;

  localparam int FR = 18;
  typedef logic signed [127:0] big_t;

  // window index (row-major, W x W) of pixel i of the line at orientation o
  function automatic int tap(input int w, input int o, input int i);
    real th, vx, vy;
    int h, k, dx, dy;
    h  = (w - 1) / 2;
    k  = i - h;
    th = 3.14159265358979323846 * real'(15 * o) / 180.0;
    vx = real'(k) * $cos(th);
    vy = real'(k) * $sin(th);
    // round half away from zero; the tiny bias settles exact halves that
    // floating point represents slightly off (cos 60, sin 30)
    dx = (vx < 0.0) ? -int'($floor(-vx + 0.5 + 1e-9)) : int'($floor(vx + 0.5 + 1e-9));
    dy = (vy < 0.0) ? -int'($floor(-vy + 0.5 + 1e-9)) : int'($floor(vy + 0.5 + 1e-9));
    return (h - dy) * w + (h + dx);
  endfunction

  function automatic longint rcp(input int n);
    return (longint'(1) << FR) / longint'(n);
  endfunction

  // inverted pixel at linear index j; zero outside the frame
  function automatic int px(ref byte unsigned img[], input int j);
    if (j < 0 || j >= img.size()) return 0;
    return 255 - int'(img[j]);
  endfunction

  // raw responses of all scales for the pixel at linear index c
  function automatic void raw(input int w, input int ncols, ref byte unsigned img[],
                              input int c, ref longint r[]);
    int h, ns;
    int win[];
    longint avg, mx, m, sum;
    h  = (w - 1) / 2;
    ns = h + 1;
    win = new[w * w];
    sum = 0;
    for (int rr = 0; rr < w; rr++)
      for (int cc = 0; cc < w; cc++) begin
        win[rr*w + cc] = px(img, c + (rr - h) * ncols + (cc - h));
        sum += win[rr*w + cc];
      end
    avg = sum * rcp(w * w);
    r = new[ns];
    for (int s = 1; s <= ns; s++) begin
      mx = 0;
      for (int o = 0; o < 12; o++) begin
        longint ls = 0;
        for (int i = h - (s - 1); i <= h + (s - 1); i++) ls += win[tap(w, o, i)];
        m = (s == 1) ? (ls << FR) : ls * rcp(2 * s - 1);
        if (m > mx) mx = m;
      end
      r[s-1] = mx - avg;
    end
  endfunction

  function automatic big_t isqrt(input big_t x);
    big_t lo = 0, hi = big_t'(1) << 40, mid;
    while (lo < hi) begin
      mid = (lo + hi + 1) >>> 1;
      if (mid * mid <= x) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  // mean / standard deviation from count, sum and sum of squares
  function automatic void stats(input longint n, input big_t sum, input big_t sq,
                                output longint mean, output longint sdev);
    big_t m, msq, v;
    if (n == 0) begin mean = 0; sdev = 0; return; end
    m    = ((sum < 0) ? -sum : sum) / n;
    msq  = sq / n;
    v    = msq - m * m;
    if (v < 0) v = 0;
    mean = (sum < 0) ? -longint'(m) : longint'(m);
    sdev = longint'(isqrt(v));
  endfunction

  function automatic longint sat(input big_t v, input int bits);
    big_t mx = (big_t'(1) <<< (bits - 1)) - 1;
    if (v > mx) return longint'(mx);
    if (v < -mx - 1) return longint'(-mx - 1);
    return longint'(v);
  endfunction

  function automatic longint standardize(input longint r, input longint mean,
                                         input longint sdev);
    big_t inv, p;
    inv = (sdev == 0) ? 0 : (big_t'(1) <<< (2 * FR)) / sdev;
    p   = big_t'(r - mean) * inv;
    return sat(p >>> FR, 36);
  endfunction

  function automatic longint combine(ref longint z[], input int igc);
    big_t s;
    s = big_t'(igc) <<< FR;
    foreach (z[i]) s += z[i];
    return sat((s * rcp(z.size() + 1)) >>> FR, 32);
  endfunction

endpackage
