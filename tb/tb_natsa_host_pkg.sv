// tb_natsa_host_pkg: the host-side work of a matrix-profile run, for the
// testbenches: random series generation, window means and standard
// deviations, the reference squared distance of two windows, and the
// diagonal scheduling scheme (pairs of diagonals dealt to the PUs).
//
// Scheduling: the diagonals to compute are those with start column
// exc+1 .. nprof-1 (the main diagonal and the exclusion zone are skipped).
// Pair k holds the k-th diagonal from the front and the k-th from the back,
// so every pair has nprof-exc cells in total; pair k goes to PU k mod NPU.
package tb_natsa_host_pkg;
  import tb_fp_pkg::*;

  localparam int MAXN = 512;

  typedef real series_t [MAXN];

  // Series of n binary32-representable values, a noisy sine with a bump.
  function automatic void gen_series(input int n, output series_t t);
    for (int k = 0; k < MAXN; k++) begin
      real v;
      v = (k < n) ? ($sin(0.3 * k) + urand(-0.5, 0.5) + ((k > n/2 && k < n/2 + 6) ? 2.0 : 0.0)) : 0.0;
      t[k] = f2r(r2f(v));
    end
  endfunction

  // Uniform random series in [0,1), like the synthetic rand_* inputs.
  function automatic void gen_uniform(input int n, output series_t t);
    for (int k = 0; k < MAXN; k++) t[k] = (k < n) ? f2r(r2f(urand(0.0, 1.0))) : 0.0;
  endfunction

  // Mean and population standard deviation of every window, rounded to
  // binary32 as the host would store them.
  function automatic void stats(input series_t t, input int n, input int m,
                                output series_t mu, output series_t sg);
    for (int i = 0; i < MAXN; i++) begin
      real s, s2;
      s = 0.0; s2 = 0.0;
      if (i <= n - m) begin
        for (int k = 0; k < m; k++) begin s += t[i + k]; s2 += t[i + k] * t[i + k]; end
        mu[i] = f2r(r2f(s / m));
        sg[i] = f2r(r2f($sqrt(s2 / m - (s / m) * (s / m))));
      end else begin
        mu[i] = 0.0; sg[i] = 1.0;
      end
    end
  endfunction

  // Squared z-normalised distance of windows i and j.
  function automatic real dist2(input series_t t, input series_t mu, input series_t sg,
                                input int m, input int i, input int j);
    real q;
    q = 0.0;
    for (int k = 0; k < m; k++) q += t[i + k] * t[j + k];
    return 2.0 * (m - (q - m * mu[i] * mu[j]) / (sg[i] * sg[j]));
  endfunction

  function automatic int n_pairs(input int nprof, input int exc);
    return (nprof - 1 - exc + 1) / 2;
  endfunction

  // Start columns of pair k; d1 = -1 when the pair is the single middle one.
  function automatic void pair_diags(input int nprof, input int exc, input int k,
                                     output int d0, output int d1);
    d0 = exc + 1 + k;
    d1 = nprof - 1 - k;
    if (d1 == d0) d1 = -1;
  endfunction
endpackage
