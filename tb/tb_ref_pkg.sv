// tb_ref_pkg: reference models for the GS-TG testbenches.
//
// Written separately from the RTL: the ellipse/rectangle test is evaluated
// in floating point (exact minimum of the quadratic form over the square),
// the fixed-point alpha and blending rules are re-derived from their
// definitions (the exponential table is computed from 2^(-k/16) with real
// arithmetic), and a scene generator builds Gaussians from a size, an angle
// and a position.
package tb_ref_pkg;
  import gstg_pkg::*;

  // ---------------- scene generation ----------------
  // Conic from standard deviations (pixels) and rotation, plus a bounding
  // radius large enough to hold the opacity-aware ellipse.
  function automatic pm_in_t make_gauss(int gidx, real cx, real cy, real sx, real sy, real th,
                                        int opac, int r, int g, int b, int depth);
    pm_in_t p;
    real c, s, xx, yy, xy, det, ia, ib, ic, lmax, tr;
    c  = $cos(th); s = $sin(th);
    xx = c*c*sx*sx + s*s*sy*sy;
    yy = s*s*sx*sx + c*c*sy*sy;
    xy = c*s*(sx*sx - sy*sy);
    det = xx*yy - xy*xy;
    ia = yy/det; ib = -xy/det; ic = xx/det;
    lmax = (sx > sy) ? sx*sx : sy*sy;
    tr = 2.0 * $ln(255.0 * opac / 65536.0) + 0.5;
    if (tr < 1.0) tr = 1.0;
    p = '0;
    p.g.gidx  = GIDX_W'(gidx);
    p.g.x     = XY_W'($rtoi($floor(cx * 16.0 + 0.5)));
    p.g.y     = XY_W'($rtoi($floor(cy * 16.0 + 0.5)));
    p.g.ca    = CON_W'($rtoi(ia * 16777216.0));
    p.g.cb    = CON_W'($rtoi(ib * 16777216.0));
    p.g.cc    = CON_W'($rtoi(ic * 16777216.0));
    p.g.opac  = OP_W'(opac);
    p.g.r     = COL_W'(r); p.g.g = COL_W'(g); p.g.b = COL_W'(b);
    p.g.depth = DEPTH_W'(depth);
    p.radius  = RAD_W'($rtoi($sqrt(tr * lmax)) + 2);
    return p;
  endfunction

  function automatic real rx(gauss_t g); return $itor(g.x) / 16.0; endfunction
  function automatic real ry(gauss_t g); return $itor(g.y) / 16.0; endfunction
  function automatic real ra(gauss_t g); return $itor(g.ca) / 16777216.0; endfunction
  function automatic real rb(gauss_t g); return $itor(g.cb) / 16777216.0; endfunction
  function automatic real rc(gauss_t g); return $itor(g.cc) / 16777216.0; endfunction

  // ---------------- threshold ----------------
  // Exact threshold 2 ln(255 sigma) in floating point.
  function automatic real thr_exact(int s);
    return 2.0 * $ln(255.0 * s / 65536.0);
  endfunction

  // Fixed-point threshold rule, re-derived: T = floor((L * 90853) / 65536)
  // with L = (e - 16) * 65536 + frac16 + 5650 for 255*s = 2^e * (1 + frac).
  function automatic longint thr_fixed(int s);
    longint v, m, l;
    int e;
    v = longint'(s) * 255;
    if (v < 65536) return -1;
    e = 0;
    while ((longint'(1) << (e + 1)) <= v) e++;
    m = ((v - (longint'(1) << e)) << 16) >> e;
    l = longint'(e - 16) * 65536 + m + 5650;
    return (l * 90853) >>> 16;
  endfunction

  // ---------------- ellipse against a square ----------------
  function automatic real qf(real a, real b, real c, real dx, real dy);
    return a*dx*dx + 2.0*b*dx*dy + c*dy*dy;
  endfunction

  // Minimum of the quadratic form over the square [x0, x0+sz-1] x [y0, y0+sz-1]
  // relative to the centre.
  function automatic real qmin_rect(gauss_t g, int x0, int y0, int sz);
    real a, b, c, cx, cy, lx, hx, ly, hy, best, v, u;
    a = ra(g); b = rb(g); c = rc(g); cx = rx(g); cy = ry(g);
    lx = x0 - cx; hx = x0 + sz - 1 - cx; ly = y0 - cy; hy = y0 + sz - 1 - cy;
    if (lx <= 0 && hx >= 0 && ly <= 0 && hy >= 0) return 0.0;
    best = 1.0e300;
    for (int e = 0; e < 2; e++) begin
      u = (e == 0) ? lx : hx;                 // vertical edge, free dy
      v = -b*u/c; if (v < ly) v = ly; if (v > hy) v = hy;
      if (qf(a, b, c, u, v) < best) best = qf(a, b, c, u, v);
      u = (e == 0) ? ly : hy;                 // horizontal edge, free dx
      v = -b*u/a; if (v < lx) v = lx; if (v > hx) v = hx;
      if (qf(a, b, c, v, u) < best) best = qf(a, b, c, v, u);
    end
    return best;
  endfunction

  // ---------------- alpha and blending (fixed point) ----------------
  function automatic longint tab(int k);
    return longint'($floor(65536.0 * $pow(2.0, -k / 16.0) + 0.5));
  endfunction

  // q of pixel (px, py), 32 fraction bits
  function automatic logic signed [127:0] q_fixed(gauss_t g, int px, int py);
    logic signed [127:0] dx, dy;
    dx = 128'(px * 16) - 128'(g.x);
    dy = 128'(py * 16) - 128'(g.y);
    return 128'(g.ca) * dx * dx + 128'(g.cb) * dx * dy * 2 + 128'(g.cc) * dy * dy;
  endfunction

  function automatic int alpha_fixed(gauss_t g, int px, int py);
    logic signed [127:0] q;
    longint y, e, t0, t1, a;
    int k, sh;
    q = q_fixed(g, px, py);
    if (q < 0) return 0;
    y = longint'(((q >>> 16) * 47275) >>> 16);
    if (y >= 20 * 65536) return 0;
    k  = int'((y >> 12) & 15);
    sh = int'(y >> 16);
    t0 = tab(k); t1 = tab(k + 1);
    e  = (t0 - (((t0 - t1) * (y & 4095)) >> 12)) >> sh;
    a  = (e * g.opac) >> 16;
    if (a > 64881) a = 64881;
    return int'(a);
  endfunction

  typedef struct { longint r, g, b, t; } px_state_t;

  function automatic px_state_t px_init();
    px_state_t s;
    s.r = 0; s.g = 0; s.b = 0; s.t = 65536;
    return s;
  endfunction

  // Blend one Gaussian into a pixel state, by equations (1) and (2).
  function automatic px_state_t px_blend(px_state_t s, gauss_t g, int px, int py);
    longint a, w;
    if (s.t < 7) return s;                 // early exit, T < 1e-4
    a = alpha_fixed(g, px, py);
    if (a * 255 < 65536) return s;         // alpha < 1/255
    w = (a * s.t) >> 16;
    s.r = s.r + ((g.r * w) >> 16);
    s.g = s.g + ((g.g * w) >> 16);
    s.b = s.b + ((g.b * w) >> 16);
    s.t = (s.t * (65536 - a)) >> 16;
    return s;
  endfunction

  function automatic int sat16(longint v);
    return (v > 65535) ? 65535 : int'(v);
  endfunction
endpackage
