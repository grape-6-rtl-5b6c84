// grape6_tb_pkg: reference model shared by the GRAPE-6 testbenches.
//
// add_pair accumulates, in double precision, the softened inverse-square
// force m_j*(x_j-x_i)/(r^2+eps^2)^1.5 in accumulator units (2^ACC_FRAC per
// unit force) and the sum of the magnitudes of the terms. force_ok decides
// whether a hardware accumulator matches: within 0.3% of the sum of term
// magnitudes (the r^-3 table is accurate to about 0.15%) plus one LSB per
// term for truncation.
package grape6_tb_pkg;
  import grape6_pkg::*;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic add_pair(input vec3_t xi, input vec3_t xj, input longint m, input longint e2,
                          inout real f [3], inout real a [3]);
    real dx [3], r2, rinv3;
    r2 = real'(e2);
    for (int k = 0; k < 3; k++) begin
      dx[k] = real'(longint'(xj[k]) - longint'(xi[k]));
      r2 += dx[k] * dx[k];
    end
    if (r2 == 0.0) return;
    rinv3 = 1.0 / (r2 * $sqrt(r2));
    for (int k = 0; k < 3; k++) begin
      f[k] += real'(m) * dx[k] * rinv3 * (2.0 ** ACC_FRAC);
      a[k] += fabs(real'(m) * dx[k] * rinv3 * (2.0 ** ACC_FRAC));
    end
  endtask

  function automatic bit force_ok(acc_t got, real want, real mag, int nterms);
    return fabs(real'(got) - want) <= 0.003 * mag + real'(nterms) + 2.0;
  endfunction

  function automatic int rnd_signed(int span);
    return int'($urandom_range(2*span)) - span;
  endfunction

endpackage
