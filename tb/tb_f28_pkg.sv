// tb_f28_pkg: reference arithmetic for the testbenches.
//
// Converts between the 28-bit floating-point format (1 sign, 7 exponent
// bits with bias 63, 20 mantissa bits with hidden one, exponent 0 = zero)
// and the simulator's double-precision real, so that expected values are
// worked out in real arithmetic independently of the RTL. Also holds a
// random operand generator, a tolerance compare, and the reference model of
// one SPH density contribution together with a random pair generator.
package tb_f28_pkg;
  import aha_pkg::*;

  function automatic real f2r(logic [27:0] v);
    int  e;
    real m, r;
    e = int'(v[26:20]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(v[19:0]) / 1048576.0;
    r = m * (2.0 ** real'(e - 63));
    return v[27] ? -r : r;
  endfunction

  // Nearest-below conversion (truncation), saturating and flushing like the
  // RTL's number format.
  function automatic logic [27:0] r2f(real x);
    logic s;
    real a;
    int  e;
    logic [19:0] m;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a == 0.0) return 28'd0;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    if (e + 63 <= 0)  return 28'd0;
    if (e + 63 > 127) return {s, 7'h7f, 20'hfffff};
    m = 20'($rtoi((a - 1.0) * 1048576.0));
    return {s, 7'(e + 63), m};
  endfunction

  // Random operand with exponent field in [elo, ehi]; sign random if sgn.
  function automatic logic [27:0] rnd(int elo, int ehi, bit sgn);
    logic [6:0] e;
    e = 7'(elo + int'($urandom % 32'(ehi - elo + 1)));
    return {sgn ? 1'($urandom) : 1'b0, e, 20'($urandom)};
  endfunction

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // |got - want| <= rel * |want| + abs_tol
  function automatic bit close(real got, real want, real rel, real abs_tol);
    return fabs(got - want) <= rel * fabs(want) + abs_tol;
  endfunction

  // Cubic-spline kernel (3-D, without the 1/h^3 factor).
  function automatic real wref(real q);
    real pi = 3.14159265358979;
    if (q < 1.0) return (1.0 - 1.5 * q * q + 0.75 * q * q * q) / pi;
    if (q < 2.0) return 0.25 * (2.0 - q) * (2.0 - q) * (2.0 - q) / pi;
    return 0.0;
  endfunction

  // Scaled distance X = |r_i - r_j| / ((h_i + h_j) / 2) of a pair.
  function automatic real xref(sph_pair_t p);
    real dx, dy, dz, h;
    dx = f2r(p.xi) - f2r(p.xj);
    dy = f2r(p.yi) - f2r(p.yj);
    dz = f2r(p.zi) - f2r(p.zj);
    h  = 0.5 * (f2r(p.hi) + f2r(p.hj));
    return $sqrt(dx * dx + dy * dy + dz * dz) / h;
  endfunction

  // m_j W(X) / h_ij^3 of a pair.
  function automatic real cref(sph_pair_t p);
    real h;
    h = 0.5 * (f2r(p.hi) + f2r(p.hj));
    return f2r(p.mj) * wref(xref(p)) / (h * h * h);
  endfunction

  // Allowed error of cref: 1 % relative (tables with 10-bit addresses) plus
  // 2e-3 of the pair's largest possible term m_j / h_ij^3 (kernel table step).
  function automatic real ctol(sph_pair_t p);
    real h;
    h = 0.5 * (f2r(p.hi) + f2r(p.hj));
    return 0.01 * cref(p) + 2.0e-3 * f2r(p.mj) / (h * h * h);
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 1000000) / 1000000.0;
  endfunction

  // Random neighbour j around particle i: offsets up to +-span in each axis,
  // smoothing lengths 0.05 .. 0.15, masses 0.5 .. 1.5.
  function automatic sph_pair_t rand_pair(sph_pair_t pi_, real span);
    sph_pair_t p = pi_;
    p.xj = r2f(f2r(pi_.xi) + urand(-span, span));
    p.yj = r2f(f2r(pi_.yi) + urand(-span, span));
    p.zj = r2f(f2r(pi_.zi) + urand(-span, span));
    p.hj = r2f(urand(0.05, 0.15));
    p.mj = r2f(urand(0.5, 1.5));
    return p;
  endfunction

  // Random particle i (positions in the unit cube).
  function automatic sph_pair_t rand_i(int tag, bit with_rho0);
    sph_pair_t p = '0;
    p.tag  = TAG_W'(tag);
    p.xi   = r2f(urand(0.0, 1.0));
    p.yi   = r2f(urand(0.0, 1.0));
    p.zi   = r2f(urand(0.0, 1.0));
    p.hi   = r2f(urand(0.05, 0.15));
    p.rho0 = with_rho0 ? r2f(urand(0.0, 100.0)) : '0;
    return p;
  endfunction

endpackage
