// fcmi_ref_pkg: sequential reference model of the FCMI accelerator for the
// testbenches.
//
// The functions recompute, cell by cell and in plain procedural code, the
// same Q20.12 arithmetic the hardware performs: the occupancy constants, the
// piecewise-linear exponential, the incomplete gamma terms, the recursive
// expectation update and the MI accumulation, and (ref_map) the traversal of
// a whole map: for each angle, every ray of every edge origin, Bresenham
// stepping with wrap-around of the minor coordinate. They share only the
// numeric constants of fcmi_pkg and the LUT file with the design.
package fcmi_ref_pkg;
  import fcmi_pkg::*;

  lut_entry_t ref_lut [OCC_LEVELS];

  function automatic void ref_load(string fname);
    $readmemh(fname, ref_lut);
  endfunction

  function automatic fx_t mulq(fx_t a, fx_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

  function automatic fx_t ref_exp(fx_t x);
    fx_t xc, y;
    int k;
    xc = (x < 0) ? 0 : (x > 32768 ? 32768 : x);
    k  = xc / 2048;
    if (k > 15) k = 15;
    y  = mulq(EXP_SLOPE[k], xc) + EXP_ICPT[k];
    return (y < 0) ? 0 : y;
  endfunction

  function automatic pre_t ref_pre(int occ, fx_t w);
    pre_t p;
    lut_entry_t e;
    fx_t g1, g2, g3, q;
    int o;
    o = (occ > 100) ? 100 : occ;
    e = ref_lut[o];
    p.w = w;
    p.l = mulq(e.lam, w);
    p.e = (o == 100) ? 0 : (o == 0) ? 4096 : ref_exp(p.l);
    g1 = 4096 - p.e;
    g2 = 4096 - mulq(p.e, 4096 + p.l);
    q  = mulq(p.l, p.l) + 2 * p.l + 8192;
    g3 = 8192 - mulq(p.e, q);
    p.ta = mulq(e.inv, g3 + mulq(g2, e.nlog));
    p.tb = mulq(e.inv, g2);
    p.tc = g2 + mulq(g1, e.nlog);
    p.td = g1;
    return p;
  endfunction

  function automatic fb_state_t ref_fb(fb_state_t s, pre_t p);
    fb_state_t n;
    fx_t u;
    u    = s.a0 + mulq(p.l, s.b0);
    n.a0 = mulq(p.e, u) + p.tc;
    n.b0 = mulq(p.e, s.b0) + p.td;
    n.b1 = mulq(p.e, s.b1 + mulq(p.w, s.b0)) + p.tb;
    n.a1 = mulq(p.e, s.a1 + mulq(p.l, s.b1) + mulq(p.w, u)) + p.ta;
    return n;
  endfunction

  function automatic fx_t ref_post(fb_state_t s, fx_t mi, fx_t dth);
    return mi + mulq(dth, s.a1 + mulq(61924, s.b1));
  endfunction

  // Builds the angle table for n rays evenly spread over the full circle.
  function automatic angle_cfg_t ref_angle(int k, int n, real phase);
    angle_cfg_t c;
    real th, cx, cy, ma, mi;
    th = 2.0 * 3.14159265358979 * (k + phase) / n;
    cx = $cos(th); cy = $sin(th);
    c.axis_y  = ((cy < 0 ? -cy : cy) > (cx < 0 ? -cx : cx));
    ma = c.axis_y ? cy : cx;
    mi = c.axis_y ? cx : cy;
    c.maj_neg = (ma < 0);
    c.min_neg = (mi < 0);
    ma = (ma < 0) ? -ma : ma;
    mi = (mi < 0) ? -mi : mi;
    c.dmaj  = coord_t'($rtoi(ma * 256.0 + 0.5));
    c.dmin  = coord_t'($rtoi(mi * 256.0 + 0.5));
    if (c.dmin > c.dmaj) c.dmin = c.dmaj;
    c.width = $rtoi($sqrt(1.0 + (real'(c.dmin) / real'(c.dmaj)) ** 2) * 4096.0 + 0.5);
    return c;
  endfunction

  // Whole-map reference. occ and mi are indexed [y*w + x].
  function automatic void ref_map(int w, int h, int nr, angle_cfg_t ang [],
                                  fx_t dth, ref int occ [], ref fx_t mi [],
                                  ref int n_resets, ref int n_wraps);
    int pw, ph;
    pw = (w + 15) / 16 * 16;
    ph = (h + 15) / 16 * 16;
    foreach (mi[i]) mi[i] = 0;
    for (int a = 0; a < nr; a++) begin
      angle_cfg_t c;
      int nmaj, nmin, pmin;
      c = ang[a];
      nmaj = c.axis_y ? h : w;
      nmin = c.axis_y ? w : h;
      pmin = c.axis_y ? pw : ph;
      for (int r = 0; r < pmin; r++) begin
        fb_state_t st;
        int d, off, prev_m;
        bit prev_ok;
        st = '0; d = 2 * c.dmin - c.dmaj; off = 0; prev_ok = 0; prev_m = -1;
        for (int k = 0; k < nmaj; k++) begin
          int m, maj, x, y;
          bit ok, jump;
          m   = c.min_neg ? r - off : r + off;
          m   = ((m % pmin) + pmin) % pmin;
          maj = c.maj_neg ? nmaj - 1 - k : k;
          ok  = (m < nmin);
          jump = (prev_m >= 0) && (m - prev_m > 1 || prev_m - m > 1);
          if (ok) begin
            x = c.axis_y ? m : maj;
            y = c.axis_y ? maj : m;
            if (k == 0 || !prev_ok || jump) begin
              st = '0;
              n_resets++;
              if (jump) n_wraps++;
            end
            st = ref_fb(st, ref_pre(occ[y*w + x], c.width));
            mi[y*w + x] = ref_post(st, mi[y*w + x], dth);
          end
          prev_ok = ok; prev_m = m;
          if (d > 0) begin off++; d -= 2 * c.dmaj; end
          d += 2 * c.dmin;
        end
      end
    end
  endfunction
endpackage
