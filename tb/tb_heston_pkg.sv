// tb_heston_pkg: testbench-side reference model of the Heston QE path
// generation, written in double-precision `real` arithmetic independently
// of the fixed-point datapath. It builds the per-asset configuration words
// from model parameters, converts between real, fixed point and IEEE single
// precision, and computes one QE variance step and one log-price step.
package tb_heston_pkg;
  import greeks_pkg::*;

  typedef struct {
    real kappa;
    real theta;
    real xi;
    real rho;
    real r;
    real dt;
    real v0;
    real s0;
  } heston_t;

  function automatic real fix2r(input fix_t x);
    return real'(x) / real'(1 << FRAC);
  endfunction

  function automatic fix_t r2fix(input real x);
    real y;
    y = x * real'(1 << FRAC);
    if (y >= 2147483647.0) return FIX_MAX;
    if (y <= -2147483648.0) return FIX_MIN;
    return fix_t'($rtoi(y >= 0.0 ? y + 0.5 : y - 0.5));
  endfunction

  // real -> IEEE binary32 bits (round to nearest, normal range only)
  function automatic logic [31:0] r2f32(input real x);
    real    a, m;
    int     e;
    longint mi;
    if (x == 0.0) return 32'h0;
    a = (x < 0.0) ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = (a - 1.0) * 8388608.0;
    mi = longint'($floor(m + 0.5));
    if (mi == 64'd8388608) begin mi = 0; e++; end
    return {(x < 0.0), 8'(e + 127), 23'(mi)};
  endfunction

  function automatic real f322r(input logic [31:0] b);
    real r;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    e = int'(b[30:23]) - 127;
    r = 1.0 + real'(b[22:0]) / 8388608.0;
    if (e >= 0) r = r * real'(64'd1 << e);
    else        r = r / real'(64'd1 << (-e));
    return b[31] ? -r : r;
  endfunction

  // Host-side precomputation of the QE constants (gamma1 = gamma2 = 1/2).
  function automatic heston_cfg_t make_cfg(input heston_t h);
    heston_cfg_t c;
    real e, g;
    e = $exp(-h.kappa * h.dt);
    g = 0.5 * h.dt * (h.kappa * h.rho / h.xi - 0.5);
    c.v0        = r2fix(h.v0);
    c.ln_s0     = r2fix($ln(h.s0));
    c.e_kdt     = r2fix(e);
    c.theta_1me = r2fix(h.theta * (1.0 - e));
    c.c1        = r2fix(h.xi * h.xi * e * (1.0 - e) / h.kappa);
    c.c2        = r2fix(h.theta * h.xi * h.xi * (1.0 - e) * (1.0 - e) / (2.0 * h.kappa));
    c.k0        = r2fix(-h.rho * h.kappa * h.theta * h.dt / h.xi + h.r * h.dt);
    c.k1        = r2fix(g - h.rho / h.xi);
    c.k2        = r2fix(g + h.rho / h.xi);
    c.k3        = r2fix(0.5 * h.dt * (1.0 - h.rho * h.rho));
    c.k4        = r2fix(0.5 * h.dt * (1.0 - h.rho * h.rho));
    return c;
  endfunction

  // standard normal CDF via erf-free series: Phi(z) = 0.5 erfc(-z/sqrt2),
  // here by Simpson integration of the density (ample accuracy for checks)
  function automatic real ref_phi(input real z);
    real a, h, s, x;
    int  n;
    if (z < -8.0) return 0.0;
    if (z > 8.0)  return 1.0;
    a = (z < 0.0) ? -z : z;
    n = 120;
    h = a / n;
    s = 0.0;
    for (int i = 0; i <= n; i++) begin
      x = i * h;
      s += ((i == 0 || i == n) ? 1.0 : ((i % 2 != 0) ? 4.0 : 2.0)) * $exp(-0.5 * x * x);
    end
    s = s * h / 3.0 / $sqrt(2.0 * 3.14159265358979);
    return (z < 0.0) ? 0.5 - s : 0.5 + s;
  endfunction

  // One Andersen QE variance step; psi is returned for branch inspection.
  function automatic real ref_var_step(input heston_cfg_t c, input real v, input real z,
                                       output real psi);
    real m, s2, inv, b2, b, a, p, beta, u;
    m   = fix2r(c.theta_1me) + fix2r(c.e_kdt) * v;
    s2  = fix2r(c.c1) * v + fix2r(c.c2);
    psi = s2 / (m * m);
    if (psi <= 1.5) begin
      inv = 2.0 / psi;
      b2  = inv - 1.0 + $sqrt(inv) * $sqrt(inv - 1.0);
      b   = $sqrt(b2);
      a   = m / (1.0 + b2);
      return a * (b + z) * (b + z);
    end
    p    = (psi - 1.0) / (psi + 1.0);
    beta = (1.0 - p) / m;
    u    = ref_phi(z);
    if (u <= p) return 0.0;
    return $ln((1.0 - p) / (1.0 - u)) / beta;
  endfunction

  function automatic real ref_lns_step(input heston_cfg_t c, input real lns, input real v,
                                       input real vn, input real z);
    real var_term;
    var_term = fix2r(c.k3) * v + fix2r(c.k4) * vn;
    if (var_term < 0.0) var_term = 0.0;
    return lns + fix2r(c.k0) + fix2r(c.k1) * v + fix2r(c.k2) * vn + $sqrt(var_term) * z;
  endfunction

  // standard normal sample (Box-Muller), clipped to +-5
  function automatic real gauss();
    real u1, u2, g;
    u1 = (real'($urandom_range(1_000_000, 1)) ) / 1_000_001.0;
    u2 = (real'($urandom_range(1_000_000, 0)) ) / 1_000_001.0;
    g  = $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
    if (g > 5.0)  g = 5.0;
    if (g < -5.0) g = -5.0;
    return g;
  endfunction

  // the three assets used by the testbenches: low, high and medium
  // volatility of variance (the high one drives the QE exponential branch)
  function automatic heston_t asset_params(input int i);
    heston_t h;
    h.kappa = 2.0;  h.theta = 0.09; h.rho = -0.5; h.r = 0.02; h.dt = 0.05;
    h.v0 = 0.09;    h.s0 = 100.0;
    case (i % 3)
      0: h.xi = 0.4;
      1: begin h.xi = 1.6; h.v0 = 0.04; h.s0 = 90.0; end
      default: begin h.xi = 0.9; h.s0 = 110.0; end
    endcase
    return h;
  endfunction
endpackage
