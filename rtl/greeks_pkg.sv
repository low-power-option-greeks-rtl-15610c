// greeks_pkg: shared types, constants and fixed-point arithmetic for the
// Heston / Longstaff-Schwartz dataflow kernel.
//
// Number format. On-chip arithmetic uses a signed 32-bit fixed-point type
// with 12 integer bits (sign included) and 20 fraction bits, i.e. the
// ap_fixed<32,12> configuration that the source study found to be the most
// accurate 32-bit fixed-point choice. The host exchanges data as IEEE-754
// single precision floats; f32_to_fix / fix_to_f32 convert at the memory
// boundary. Choosing fixed point rather than floating point for the
// datapath is a choice of this design (see README).
//
// Arithmetic. All functions saturate to the representable range and
// truncate (round towards minus infinity) below the last fraction bit.
// exp uses a range reduction to a power of two and a degree-6 polynomial;
// ln normalises to [1,2) and uses the atanh series; sqrt is a bit-serial
// integer square root unrolled as a loop; the normal CDF is the
// Abramowitz-Stegun 26.2.17 polynomial. These are combinational functions:
// the modules that call them place a parameterised register pipeline after
// them for a retiming flow to spread the logic across.
package greeks_pkg;

  localparam int FIX_W    = 32;
  localparam int FRAC     = 20;
  localparam int MEM_W    = 512;              // external memory word
  localparam int LANES    = MEM_W / 32;       // float32 values per word
  localparam int ADDR_W   = 32;               // external word address
  localparam int CNT_W    = 32;               // element counters

  typedef logic signed [FIX_W-1:0] fix_t;
  typedef logic [MEM_W-1:0]        mem_word_t;
  typedef logic [ADDR_W-1:0]       mem_addr_t;

  localparam fix_t FIX_ONE = fix_t'(32'sd1 <<< FRAC);
  localparam fix_t FIX_MAX = fix_t'(32'h7fff_ffff);
  localparam fix_t FIX_MIN = fix_t'(32'h8000_0000);

  // Andersen QE switching threshold psi_c = 1.5
  localparam fix_t PSI_C   = fix_t'(32'sd1572864);

  // Per-asset Heston model configuration, precomputed on the host from
  // (kappa, theta, xi, rho, r, dt, v0, S0) as in Andersen's QE scheme:
  //   e_kdt     = exp(-kappa dt)
  //   theta_1me = theta (1 - e_kdt)          m   = theta_1me + e_kdt V
  //   c1, c2    : s^2 = c1 V + c2
  //   k0..k4    : ln S' = ln S + k0 + k1 V + k2 V' + sqrt(k3 V + k4 V') Z
  typedef struct packed {
    fix_t v0;
    fix_t ln_s0;
    fix_t e_kdt;
    fix_t theta_1me;
    fix_t c1;
    fix_t c2;
    fix_t k0;
    fix_t k1;
    fix_t k2;
    fix_t k3;
    fix_t k4;
  } heston_cfg_t;

  // Variance stream element: variance at the start and end of a timestep.
  typedef struct packed {
    fix_t v_cur;
    fix_t v_next;
  } var_pair_t;

  // Run-time arguments of one kernel invocation.
  typedef struct packed {
    logic [15:0] n_assets;    // assets
    logic [15:0] n_steps;     // timesteps
    logic [15:0] n_paths;     // paths per batch
    logic [15:0] n_batches;   // batches of paths
    mem_addr_t   zv_base;     // corrpathcube (variance normals), word address
    mem_addr_t   zs_base;     // corrpathcube_p1 (price normals), word address
    mem_addr_t   out_base;    // reduced path results, word address
  } kernel_args_t;

  // ---------------------------------------------------------------------
  // Fixed-point primitives
  // ---------------------------------------------------------------------
  function automatic fix_t sat64(input logic signed [63:0] x);
    if (x > 64'sd2147483647)       return FIX_MAX;
    else if (x < -64'sd2147483648) return FIX_MIN;
    else                           return fix_t'(x);
  endfunction

  function automatic fix_t fadd(input fix_t a, input fix_t b);
    logic signed [63:0] ae, be;
    ae = 64'(a); be = 64'(b);
    return sat64(ae + be);
  endfunction

  function automatic fix_t fsub(input fix_t a, input fix_t b);
    logic signed [63:0] ae, be;
    ae = 64'(a); be = 64'(b);
    return sat64(ae - be);
  endfunction

  function automatic fix_t fmul(input fix_t a, input fix_t b);
    logic signed [63:0] ae, be, p;
    ae = 64'(a); be = 64'(b);
    p  = (ae * be) >>> FRAC;
    return sat64(p);
  endfunction

  function automatic fix_t fdiv(input fix_t a, input fix_t b);
    logic signed [63:0] num, den;
    if (b == '0) return (a < 0) ? FIX_MIN : FIX_MAX;
    num = 64'(a);
    num = num <<< FRAC;
    den = 64'(b);
    return sat64(num / den);
  endfunction

  function automatic fix_t fmax(input fix_t a, input fix_t b);
    return (a > b) ? a : b;
  endfunction

  // sqrt(a) for a >= 0; returns 0 for a <= 0
  function automatic fix_t fsqrt(input fix_t a);
    logic [63:0] op, res, one;
    if (a <= 0) return '0;
    op  = 64'(a) << FRAC;
    res = '0;
    one = 64'h4000_0000_0000_0000;
    for (int i = 0; i < 32; i++) begin
      if (op >= res + one) begin
        op  = op - (res + one);
        res = (res >> 1) + one;
      end else begin
        res = res >> 1;
      end
      one = one >> 2;
    end
    return fix_t'(res);
  endfunction

  // exp(x) = 2^n * 2^f with y = x log2(e) = n + f, 0 <= f < 1
  function automatic fix_t fexp(input fix_t x);
    fix_t y, f, p;
    logic signed [FIX_W-1:0] n;
    logic [63:0] r;
    y = fmul(x, fix_t'(32'sd1512775));          // log2(e)
    n = y >>> FRAC;
    f = y - (n <<< FRAC);
    p = fix_t'(32'sd19);                         // ln2^6/6!
    p = fadd(fmul(p, f), fix_t'(32'sd1398));     // ln2^5/5!
    p = fadd(fmul(p, f), fix_t'(32'sd10085));    // ln2^4/4!
    p = fadd(fmul(p, f), fix_t'(32'sd58200));    // ln2^3/3!
    p = fadd(fmul(p, f), fix_t'(32'sd251896));   // ln2^2/2!
    p = fadd(fmul(p, f), fix_t'(32'sd726817));   // ln2
    p = fadd(fmul(p, f), FIX_ONE);
    if (n >= 11)  return FIX_MAX;
    if (n <= -22) return '0;
    if (n >= 0) begin
      r = 64'(p) << n;
      return (r > 64'h7fff_ffff) ? FIX_MAX : fix_t'(r);
    end
    return p >>> (-n);
  endfunction

  // ln(x) for x > 0; returns FIX_MIN for x <= 0
  function automatic fix_t flog(input fix_t x);
    int   k;
    fix_t m, u, u2, t;
    logic signed [63:0] e_ln2;
    if (x <= 0) return FIX_MIN;
    k = 0;
    for (int i = 0; i < FIX_W - 1; i++) if (x[i]) k = i;
    if (k >= FRAC) m = x >>> (k - FRAC);
    else           m = x <<< (FRAC - k);
    u  = fdiv(m - FIX_ONE, m + FIX_ONE);
    u2 = fmul(u, u);
    t  = fix_t'(32'sd116508);                    // 1/9
    t  = fadd(fmul(t, u2), fix_t'(32'sd149797)); // 1/7
    t  = fadd(fmul(t, u2), fix_t'(32'sd209715)); // 1/5
    t  = fadd(fmul(t, u2), fix_t'(32'sd349525)); // 1/3
    t  = fadd(fmul(t, u2), FIX_ONE);
    e_ln2 = 64'(k - FRAC) * 64'sd726817;         // (k-FRAC) ln2
    return sat64(e_ln2 + 64'(fmul(u, t)) * 2);
  endfunction

  // Standard normal CDF, Abramowitz & Stegun 26.2.17 (|error| < 7.5e-8)
  function automatic fix_t fphi(input fix_t z);
    fix_t az, t, poly, pdf, q;
    az = (z < 0) ? -z : z;
    if (az > fix_t'(32'sd8388608)) return (z < 0) ? '0 : FIX_ONE;  // |z| > 8
    t    = fdiv(FIX_ONE, fadd(FIX_ONE, fmul(fix_t'(32'sd242894), az)));
    poly = fix_t'(32'sd1394894);
    poly = fadd(fmul(poly, t), -fix_t'(32'sd1909725));
    poly = fadd(fmul(poly, t), fix_t'(32'sd1868015));
    poly = fadd(fmul(poly, t), -fix_t'(32'sd373884));
    poly = fadd(fmul(poly, t), fix_t'(32'sd334896));
    poly = fmul(poly, t);
    pdf  = fmul(fix_t'(32'sd418321), fexp(-(fmul(az, az) >>> 1)));
    q    = fmul(pdf, poly);                      // upper tail 1 - Phi(|z|)
    return (z < 0) ? q : FIX_ONE - q;
  endfunction

  // ---------------------------------------------------------------------
  // Host format conversion (IEEE-754 binary32 <-> fix_t), truncating,
  // denormals flushed to zero, out-of-range values saturated.
  // ---------------------------------------------------------------------
  function automatic fix_t f32_to_fix(input logic [31:0] f);
    logic [7:0]  e;
    logic [63:0] mant, mag;
    int          sh;
    e    = f[30:23];
    mant = {40'd0, 1'b1, f[22:0]};
    if (e == 8'd0) return '0;
    sh = int'(e) - 130;                          // 127 + 23 - FRAC
    if (sh >= 8)        mag = 64'h8000_0000;     // saturate
    else if (sh >= 0)   mag = mant << sh;
    else if (sh > -25)  mag = mant >> (-sh);
    else                mag = '0;
    if (f[31]) return (mag >= 64'h8000_0000) ? FIX_MIN : -fix_t'(mag);
    return (mag >= 64'h8000_0000) ? FIX_MAX : fix_t'(mag);
  endfunction

  function automatic logic [31:0] fix_to_f32(input fix_t x);
    logic [31:0] mag;
    logic [31:0] mant;
    int          k;
    if (x == '0) return '0;
    mag = (x < 0) ? 32'(-64'(x)) : 32'(x);
    k = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) k = i;
    if (k >= 23) mant = mag >> (k - 23);
    else         mant = mag << (23 - k);
    return {x[FIX_W-1], 8'(k - FRAC + 127), mant[22:0]};
  endfunction

  // ---------------------------------------------------------------------
  // Andersen QE steps
  // ---------------------------------------------------------------------
  // One QE variance step V -> V' driven by the normal sample z.
  // exp_branch reports which of the two QE branches was taken.
  function automatic var_pair_t qe_variance(input heston_cfg_t c, input fix_t v,
                                            input fix_t z, output logic exp_branch);
    fix_t m, s2, psi, inv, b2, b, a, p, beta, u, vn, bz;
    var_pair_t r;
    m   = fadd(c.theta_1me, fmul(c.e_kdt, v));
    s2  = fadd(fmul(c.c1, v), c.c2);
    psi = fdiv(s2, fmul(m, m));
    exp_branch = (psi > PSI_C);
    if (!exp_branch) begin
      inv = fdiv(fix_t'(32'sd2097152), psi);     // 2/psi
      b2  = fadd(fsub(inv, FIX_ONE), fmul(fsqrt(inv), fsqrt(fsub(inv, FIX_ONE))));
      b   = fsqrt(b2);
      a   = fdiv(m, fadd(FIX_ONE, b2));
      bz  = fadd(b, z);
      vn  = fmul(a, fmul(bz, bz));
    end else begin
      p    = fdiv(fsub(psi, FIX_ONE), fadd(psi, FIX_ONE));
      beta = fdiv(fsub(FIX_ONE, p), m);
      u    = fphi(z);
      if (u <= p) vn = '0;
      else begin
        // ln((1-p)/(1-u)) as a difference of logarithms: the ratio itself
        // exceeds the format's range (2048) for z beyond about 3.7. 1 - u is
        // kept at least one LSB so that the logarithm stays finite.
        vn = fdiv(fsub(flog(fsub(FIX_ONE, p)), flog(fmax(fsub(FIX_ONE, u), fix_t'(1)))), beta);
      end
    end
    r.v_cur  = v;
    r.v_next = vn;
    return r;
  endfunction

  // One QE log-price step (Y1QE): ln S -> ln S'.
  function automatic fix_t y1qe(input heston_cfg_t c, input fix_t ln_s,
                                input var_pair_t vp, input fix_t z);
    fix_t drift, var_term;
    drift    = fadd(fadd(c.k0, fmul(c.k1, vp.v_cur)), fmul(c.k2, vp.v_next));
    var_term = fadd(fmul(c.k3, vp.v_cur), fmul(c.k4, vp.v_next));
    return fadd(fadd(ln_s, drift), fmul(fsqrt(var_term), z));
  endfunction

endpackage
