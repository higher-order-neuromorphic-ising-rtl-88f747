// fn_noise_pkg: behavioural model of the host-side Fowler-Nordheim annealer
// used by the testbenches to produce noise thresholds.
//
// The temperature follows tau(t) = A / (C * ln(1 + t/C)) with t = 1 + n*delta
// for iteration n; each threshold is mu = tau(t) * ln(B * u) with u uniform in
// (0, 1]: an exponential variable of mean ln(B) - 1 scaled by the
// temperature, truncated toward zero to a 16-bit signed integer. B > 1 lets
// some thresholds be positive, which is what allows uphill moves. In the real system these
// samples are generated in software on the host and streamed in.
package fn_noise_pkg;

  function automatic real fn_tau(real a, real c, real t);
    return a / (c * $ln(1.0 + t / c));
  endfunction

  function automatic logic signed [15:0] fn_sample(real a, real b, real c, real delta, longint n);
    real u, t, m;
    u = (real'($urandom) + 1.0) / 4294967296.0;
    t = 1.0 + delta * real'(n);
    m = fn_tau(a, c, t) * $ln(b * u);
    if (m > 32767.0) m = 32767.0;
    if (m < -32768.0) m = -32768.0;
    return 16'($rtoi(m));
  endfunction

endpackage
