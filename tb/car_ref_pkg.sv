// car_ref_pkg: reference arithmetic for the testbenches.  It restates the
// fixed-point CAR section (round-half-up products, saturation to 24 bits)
// with 64-bit integers, written apart from the RTL, and offers a helper
// that derives section coefficients from the Greenwood map.
package car_ref_pkg;

  localparam longint DMAX = (64'sd1 <<< 23) - 1;
  localparam longint DMIN = -(64'sd1 <<< 23);

  function automatic longint rsat(input longint v);
    if (v > DMAX) return DMAX;
    if (v < DMIN) return DMIN;
    return v;
  endfunction

  function automatic longint rmul(input longint k, input longint d);
    return rsat((k * d + 32768) >>> 16);
  endfunction

  typedef struct {
    longint y;
    longint w1;
    longint w2;
  } ref_out_t;

  // One section step: inputs x, w1, w2 and coefficients a, c, g, h.
  function automatic ref_out_t rstep(input longint x, input longint w1,
                                     input longint w2, input longint a,
                                     input longint c, input longint g,
                                     input longint h);
    ref_out_t o;
    o.w1 = rsat(x + rmul(a, w1) - rmul(c, w2));
    o.w2 = rsat(rmul(c, w1) + rmul(a, w2));
    o.y  = rmul(g, rsat(x + rmul(h, o.w2)));
    return o;
  endfunction

  // Coefficients of section i of n (section 0 at the basal end, x = 1,
  // the last one at x = 0.023), Greenwood map f = 165.4 (10^(2.1 x) - 1),
  // fs = 48 kHz, pole radius r = 1 - rfac * theta, h = c0, g for unity DC
  // gain.  Returned in Q2.16.
  typedef struct {
    longint a;
    longint c;
    longint g;
    longint h;
  } ref_coef_t;

  function automatic longint q16(input real v);
    return longint'($floor(v * 65536.0 + 0.5));
  endfunction

  function automatic ref_coef_t greenwood_coefs(input int i, input int n,
                                                input real rfac);
    ref_coef_t k;
    real xpos, f, th, r, a0, c0, h, g;
    xpos = (n > 1) ? 1.0 - (1.0 - 0.023) * real'(i) / real'(n - 1) : 1.0;
    f    = 165.4 * ($pow(10.0, 2.1 * xpos) - 1.0);
    th   = 2.0 * 3.14159265358979 * f / 48000.0;
    r    = 1.0 - rfac * th;
    if (r < 0.5) r = 0.5;
    a0   = $cos(th);
    c0   = $sin(th);
    h    = c0;
    g    = (1.0 - 2.0 * a0 * r + r * r) / (1.0 - (2.0 * a0 - h * c0) * r + r * r);
    k.a  = q16(a0 * r);
    k.c  = q16(c0 * r);
    k.g  = q16(g);
    k.h  = q16(h);
    return k;
  endfunction

endpackage
