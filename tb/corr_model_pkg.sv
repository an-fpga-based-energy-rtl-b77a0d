// corr_model_pkg: reference models of the two energy correction formulas
// in the fixed-point form of the datapath, shared by the unit and system
// testbenches. The logarithm table is taken from $ln, the reciprocal from
// integer division, independently of the RTL table functions.
package corr_model_pkg;

  typedef struct { int unsigned e; bit sat; } corr_t;

  function automatic int unsigned lt(longint unsigned x);
    return int'($floor(4096.0 * $ln(real'(x)) + 0.5)) % 16384;
  endfunction

  function automatic int lam(longint unsigned x);
    int l = 0;
    while ((x >> l) >= 4096) l++;
    return l;
  endfunction

  function automatic longint unsigned inv(longint unsigned x);
    int l = lam(x);
    longint unsigned y = x >> l;
    return ((y <= 1) ? 64'd1048575 : (64'd1048576 / y)) >> l;
  endfunction

  // E = n*[ln n - ln(n - b*k)], b in Q0.16
  function automatic corr_t non_ics(longint unsigned n, longint unsigned b, longint unsigned k);
    corr_t r;
    longint unsigned bk, m, an, am, diff, e;
    int l;
    r.sat = 1; r.e = 1023;
    bk = (b * k) >> 16;
    if (bk >= n) return r;
    m = n - bk;
    l = lam(n);
    an = n >> l; am = m >> l;
    if (am == 0 || am * 54 <= an) return r;
    diff = (lt(an) - lt(am) + 16384) % 16384;
    e = (n * diff) >> 12;
    if (e >= 1024) return r;
    r.sat = 0; r.e = int'(e);
    return r;
  endfunction

  // E = 1/(k*(1/b0+1/b1) - 1/n0) + 1/(k*(1/b0+1/b1))
  function automatic corr_t ics(longint unsigned n0, longint unsigned b0, longint unsigned b1, longint unsigned k);
    corr_t r;
    longint unsigned p, tn, e;
    r.sat = 1; r.e = 1023;
    p  = k * (inv(b0) + inv(b1));
    tn = inv(n0);
    if (p <= tn) return r;
    e = inv(p - tn) + inv(p);
    if (e >= 1024) return r;
    r.sat = 0; r.e = int'(e);
    return r;
  endfunction

endpackage
