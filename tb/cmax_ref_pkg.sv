// cmax_ref_pkg -- behavioural reference of the engine's arithmetic, for the
// testbenches.  It computes the same quantities as the RTL from the
// equations, with plain two-dimensional images instead of parity banks, a
// direct 2-D separable convolution instead of line buffers, and whole-window
// loops instead of streaming, so it checks the architecture (banking,
// sorting, local accumulation, pending merge, streaming blur) against the
// plain formulation.  Fixed-point rounding follows the formats documented
// in cmax_pkg.
package cmax_ref_pkg;
  import cmax_pkg::*;

  typedef logic signed [95:0] w96_t;

  typedef struct {
    int x0, y0;
    int ax, ay;
    longint rx[3];
    longint ry[3];
    int  pact;
    bit  valid;
  } rwarp_t;

  function automatic rwarp_t ref_warp(event_t e, warp_cfg_t c);
    rwarp_t r;
    w96_t xn, yn, b, d, xy, su, sv, u, v, fx, fy, dt, xw, yw, xs, ys;
    w96_t j[6];
    int sh, ws, hs;
    fx = w96_t'(c.fx); fy = w96_t'(c.fy);
    xn = ((w96_t'(e.x) * 65536 - w96_t'(c.cx)) * w96_t'(c.inv_fx)) >>> 30;
    yn = ((w96_t'(e.y) * 65536 - w96_t'(c.cy)) * w96_t'(c.inv_fy)) >>> 30;
    dt = w96_t'(int'(e.t) - int'(c.t_ref));
    b  = 65536 + ((xn * xn) >>> 16);
    d  = 65536 + ((yn * yn) >>> 16);
    xy = (xn * yn) >>> 16;
    su = ((xy * w96_t'(c.wx)) >>> 16) - ((b * w96_t'(c.wy)) >>> 16) + ((yn * w96_t'(c.wz)) >>> 16);
    sv = ((d * w96_t'(c.wx)) >>> 16) - ((xy * w96_t'(c.wy)) >>> 16) - ((xn * w96_t'(c.wz)) >>> 16);
    u  = (su * fx) >>> 16;
    v  = (sv * fy) >>> 16;
    xw = w96_t'(e.x) * 65536 - ((dt * u) >>> 24);
    yw = w96_t'(e.y) * 65536 - ((dt * v) >>> 24);
    xs = xw >>> int'(c.stage);
    ys = yw >>> int'(c.stage);
    j[0] = (fx * xy) >>> 16;  j[1] = -((fx * b) >>> 16); j[2] = (fx * yn) >>> 16;
    j[3] = (fy * d) >>> 16;   j[4] = -((fy * xy) >>> 16); j[5] = -((fy * xn) >>> 16);
    sh = 28 + int'(c.stage);
    for (int k = 0; k < 3; k++) begin
      r.rx[k] = longint'(32'((dt * j[k]) >>> sh));
      r.ry[k] = longint'(32'((dt * j[k+3]) >>> sh));
    end
    r.x0 = int'(xs >>> 16);
    r.y0 = int'(ys >>> 16);
    r.ax = int'(xs[15:0]);
    r.ay = int'(ys[15:0]);
    ws = W_FULL >> int'(c.stage);
    hs = (H_FULL + (1 << int'(c.stage)) - 1) >> int'(c.stage);
    r.valid = (r.x0 >= 0) && (r.y0 >= 0) && (r.x0 < ws - 1) && (r.y0 < hs - 1);
    r.pact  = r.valid ? r.y0 * ws + r.x0 : 0;
    return r;
  endfunction

  // deltas of tap (tx, ty) for the four channels
  function automatic void ref_vote(rwarp_t r, bit pol, int tx, int ty, output int dlt[4]);
    longint wx, wy, w, d;
    wx = tx ? r.ax : 65536 - r.ax;
    wy = ty ? r.ay : 65536 - r.ay;
    w  = (wx * wy) >>> 20;
    dlt[0] = int'(pol ? w : -w);
    for (int j = 0; j < 3; j++) begin
      d = ((tx ? r.rx[j] : -r.rx[j]) * wy + (ty ? r.ry[j] : -r.ry[j]) * wx) >>> 16;
      dlt[j+1] = int'(pol ? d : -d);
    end
  endfunction
endpackage
