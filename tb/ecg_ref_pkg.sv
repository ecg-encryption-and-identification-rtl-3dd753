// ecg_ref_pkg: reference model of the ECG identification arithmetic for the
// testbenches, computed with wide (128-bit) integers so that no intermediate
// result can overflow:
//   p[j] = sat32( floor( sum_k (test[k] - mean[k]) * E[j][k] / 2^frac ) )
//   d[i] = sum_j (p[j] - P[i][j])^2
//   id   = lowest i with the smallest d[i]
package ecg_ref_pkg;

  typedef logic signed [127:0] wide_t;
  typedef int sig_q_t [$];

  function automatic int project(input int test [], input int mean [], input int eig [],
                                 input int j, input int n, input int frac);
    wide_t acc, lim;
    acc = 0;
    for (int k = 0; k < n; k++)
      acc += (wide_t'(test[k]) - wide_t'(mean[k])) * wide_t'(eig[j*n + k]);
    acc = acc >>> frac;
    lim = 128'sd2147483647;
    if (acc > lim) return 32'h7fffffff;
    if (acc < -lim - 1) return 32'h80000000;
    return int'(acc);
  endfunction

  function automatic wide_t distance(input int p [], input int trn [], input int i, input int m);
    wide_t acc, d;
    acc = 0;
    for (int j = 0; j < m; j++) begin
      d = wide_t'(p[j]) - wide_t'(trn[i*m + j]);
      acc += d * d;
    end
    return acc;
  endfunction

endpackage
