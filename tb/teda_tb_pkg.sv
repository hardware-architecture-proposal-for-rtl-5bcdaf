// teda_tb_pkg: reference arithmetic for the TEDA testbenches.
//
// Converts between binary32 bit patterns and the simulator's 64-bit real.
// to_f32 rounds a double to binary32 (nearest, ties to even) and flushes
// results below the smallest normal number to zero, matching the datapath.
// Because a double carries more than twice the 24 significand bits of
// binary32, a sum, product or quotient of two binary32 values computed in
// double and then rounded once more to binary32 is the correctly rounded
// binary32 result, so the operator testbenches can demand exact bits.
// teda_model is the reference for whole-pipeline tests.
package teda_tb_pkg;

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  function automatic real from_f32(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    if (f[30:23] == 8'hFF) begin
      d = {f[31], 11'h7FF, f[22:0], 29'h0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'h0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_f32(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;      // with hidden bit
    logic [24:0] mt;     // hidden + 23 + carry
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? QNAN : {s, 8'hFF, 23'h0};
    if (d[62:52] == 11'h000) return {s, 31'h0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mt = {1'b0, m[52:29]};
    g  = m[28];
    st = (m[27:0] != 0);
    if (g && (st || mt[0])) mt = mt + 1;
    if (mt[24]) begin mt = mt >> 1; e = e + 1; end
    if (e >= 255) return {s, 8'hFF, 23'h0};
    if (e <= 0)   return {s, 31'h0};
    return {s, 8'(e), mt[22:0]};
  endfunction

  function automatic bit is_nan(input logic [31:0] f);
    return (f[30:23] == 8'hFF) && (f[22:0] != 0);
  endfunction

  // random normal binary32 with exponent field in [elo, ehi]
  function automatic logic [31:0] rand_f32(input int elo, input int ehi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(elo + int'($urandom % (ehi - elo + 1)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  // relative closeness of two reals
  function automatic bit close(input real a, input real b, input real tol);
    real d, m;
    d = (a > b) ? a - b : b - a;
    m = (a < 0 ? -a : a);
    if ((b < 0 ? -b : b) > m) m = (b < 0 ? -b : b);
    return d <= tol * m + 1.0e-30;
  endfunction

  // One binary32 operation each, correctly rounded, NaN canonical. These
  // mirror the datapath operators one for one, so a model written with them
  // in the same order as the circuit reproduces its bits exactly.
  function automatic logic [31:0] f_add(input logic [31:0] a, input logic [31:0] b);
    return to_f32(from_f32(a) + from_f32(b));
  endfunction
  function automatic logic [31:0] f_sub(input logic [31:0] a, input logic [31:0] b);
    return to_f32(from_f32(a) - from_f32(b));
  endfunction
  function automatic logic [31:0] f_mul(input logic [31:0] a, input logic [31:0] b);
    return to_f32(from_f32(a) * from_f32(b));
  endfunction
  function automatic logic [31:0] f_div(input logic [31:0] a, input logic [31:0] b);
    return to_f32(from_f32(a) / from_f32(b));
  endfunction
  function automatic logic [31:0] f_u2f(input longint unsigned u);
    return to_f32(real'(u));
  endfunction
  function automatic bit f_gt(input logic [31:0] a, input logic [31:0] b);
    if (is_nan(a) || is_nan(b)) return 1'b0;
    return from_f32(a) > from_f32(b);
  endfunction
  function automatic logic [31:0] f_kratio(input longint unsigned k);
    return f_div(f_u2f(k - 1), f_u2f(k));
  endfunction
  function automatic logic [31:0] f_invk(input longint unsigned k);
    return f_div(32'h3F80_0000, f_u2f(k));
  endfunction

  // compares two words; NaN matches any NaN
  function automatic bit same(input logic [31:0] got, input logic [31:0] exp);
    if (is_nan(exp)) return is_nan(got);
    return got === exp;
  endfunction

  // Reference TEDA model. step() takes one sample and returns what the
  // pipeline must output for it: the binary32 results, computed operator by
  // operator in the circuit's order, and the same quantities in double
  // precision straight from the recursive equations, for a tolerance check.
  class teda_model;
    int unsigned     n;
    longint unsigned k;
    logic [31:0]     mu [];
    logic [31:0]     var_f;
    real             mu_d [];
    real             var_d;
    logic [31:0]     m2;
    // results of the last step
    logic [31:0]     xi, zeta, thr;
    bit              outlier;
    real             xi_d, zeta_d, thr_d;
    bit              outlier_d;

    function new(int unsigned n_, logic [31:0] m2_);
      n = n_; m2 = m2_;
      mu = new[n]; mu_d = new[n];
      reset();
    endfunction

    function void reset();
      k = 1; var_f = 0; var_d = 0.0;
      foreach (mu[i]) begin mu[i] = 0; mu_d[i] = 0.0; end
    endfunction

    function void step(input logic [31:0] x []);
      logic [31:0] d, acc, invk, kr;
      real dd, dist_d;
      kr = f_kratio(k); invk = f_invk(k);
      // MEAN
      foreach (mu[i]) mu[i] = (k == 1) ? x[i] : f_add(f_mul(mu[i], kr), f_mul(x[i], invk));
      // VARIANCE
      acc = 0;
      foreach (mu[i]) begin
        d = f_sub(x[i], mu[i]);
        acc = (i == 0) ? f_mul(d, d) : f_add(acc, f_mul(d, d));
      end
      var_f = (k == 1) ? 32'h0 : f_add(f_mul(acc, invk), f_mul(kr, var_f));
      // ECCENTRICITY and OUTLIER
      xi   = f_add(f_div(acc, f_mul(var_f, f_u2f(k))), invk);
      zeta = f_div(xi, 32'h4000_0000);
      thr  = f_div(f_add(m2, 32'h3F80_0000), f_mul(f_u2f(k), 32'h4000_0000));
      outlier = f_gt(zeta, thr);
      // double precision, Eqs. of the algorithm
      dist_d = 0.0;
      foreach (mu_d[i]) begin
        mu_d[i] = (k == 1) ? from_f32(x[i])
                           : (real'(k - 1) / real'(k)) * mu_d[i] + from_f32(x[i]) / real'(k);
        dd = from_f32(x[i]) - mu_d[i];
        dist_d += dd * dd;
      end
      var_d = (k == 1) ? 0.0 : (real'(k - 1) / real'(k)) * var_d + dist_d / real'(k);
      xi_d  = (var_d > 0.0) ? 1.0 / real'(k) + dist_d / (real'(k) * var_d) : 0.0;
      zeta_d = xi_d / 2.0;
      thr_d  = (from_f32(m2) + 1.0) / (2.0 * real'(k));
      outlier_d = (var_d > 0.0) && (zeta_d > thr_d);
      k++;
    endfunction
  endclass

endpackage
