// lrm_ref_pkg -- reference arithmetic for the luminous-region monitor tests.
//
// Straightforward, non-pipelined models of the estimator steps, written
// independently of the RTL: lower median by sorting, the +-50 % outlier rule
// in the form 2c < m or 2c > 3m, the normalised score with 128-bit integer
// arithmetic, and the linear calibration with 64-bit signed arithmetic.
package lrm_ref_pkg;

  typedef longint unsigned u64_t;

  // Lower median of the values of one ring (ring = index bit 0).
  function automatic u64_t ref_median(u64_t vals[$], int ring);
    u64_t q[$];
    foreach (vals[i]) if ((i % 2) == ring) q.push_back(vals[i]);
    q.sort();
    return q[(q.size() - 1) / 2];
  endfunction

  function automatic bit ref_is_outlier(u64_t c, u64_t m);
    return (2 * c < m) || (2 * c > 3 * m);
  endfunction

  // trunc(num * 2^16 / den) saturated to signed 32 bits; 0 when den == 0.
  function automatic int ref_score(longint num, u64_t den);
    logic [127:0] mag, q;
    bit neg;
    if (den == 0) return 0;
    neg = num < 0;
    mag = neg ? 128'(-num) : 128'(num);
    q   = (mag << 16) / 128'(den);
    if (!neg) return (q > 128'h7FFF_FFFF) ? 32'h7FFF_FFFF : int'(q);
    else      return (q > 128'h8000_0000) ? 32'sh8000_0000 : -int'(q);
  endfunction

  function automatic int ref_calib(int t, int alpha, int beta);
    longint p, s;
    p = longint'(alpha) * longint'(t);
    s = (p >>> 31) + longint'(beta);
    if (s > 64'sd2147483647)  return 32'sh7FFF_FFFF;
    if (s < -64'sd2147483648) return 32'sh8000_0000;
    return int'(s);
  endfunction

endpackage
