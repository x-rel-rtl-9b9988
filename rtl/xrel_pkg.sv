// xrel_pkg -- shared types and elaboration-time arithmetic of the X-Rel
// approximate-reliability TMR system.
//
// Quality bound (follows the paper, Eq. 1-2): the user gives the voter width N
// and an output quality-degradation upper bound Q_DUBV.  The maximum tolerable
// error distance is MTED = (2^N - 1) * Q_DUBV / 100, and the number of relaxed
// low bits is k = floor(log2(MTED)).  Q_DUBV is carried here as an integer in
// units of 0.001 % (12.5 % -> 12500) so that the smallest bound of the paper's
// sweep, 0.006 %, is representable.  A bound that gives MTED < 1 yields k = 0,
// an exact voter (this corner is this design's choice).
//
// Module truncation: the paper picks per-node truncation with an offline
// integer linear program whose constraint is the output error variance
// (mean squared error) of the module, sum_i ES_i^2 * v_i, bounded by
//     v_UB = N/(N-1) * (2^k - 1)^2.
// Its per-node solutions are not published.  Two elaboration-time rules give
// parameter defaults for a TERMS-long dot product (every multiplier has error
// sensitivity 2^-SHIFT at the N-bit output, SHIFT = dropped low bits):
//  * mul_trunc_var()   (default): the largest truncation j, equal for every
//    multiplier, whose module mean squared error stays within v_UB:
//        (TERMS * v_mul(j) + TERMS*(TERMS-1) * mu_mul(j)^2) / 4^SHIFT <= v_UB
//    v_mul and mu_mul are the mean squared error and the mean error of one
//    truncated multiplier for uniformly distributed operands.  The constraint
//    is the paper's; the uniform choice replaces its optimised per-node one,
//    and the TERMS*(TERMS-1)*mu^2 term is this design's addition: truncation
//    errors all have the same sign, so their means add up coherently and a
//    sum of per-node v alone underestimates the module MSE several times.
//  * mul_trunc_worst(): the largest uniform j whose worst-case error stays
//    below 2^k output LSBs for every input:
//        TERMS * (2^j - 1) * (2^DW + 2^CW)  <=  (2^k - 1) * 2^SHIFT
package xrel_pkg;

  // Voter outcome, following the cases printed in the voter's pseudo-code.
  typedef enum logic [2:0] {
    VOTE_AGREE       = 3'd0,  // OM1 == OM2 == OM3
    VOTE_M3_FAULT    = 3'd1,  // OM1 == OM2 != OM3
    VOTE_M1_FAULT    = 3'd2,  // OM2 == OM3 != OM1
    VOTE_M2_FAULT    = 3'd3,  // OM1 == OM3 != OM2
    VOTE_NO_MAJORITY = 3'd4   // all three differ: Error = 1
  } vote_status_e;

  // Per-node truncation amount (number of dropped input LSBs) of one
  // data-flow-graph node; arrays of these are packed so they can be passed
  // down the hierarchy as parameters.
  typedef logic [4:0] trunc_t;

  // Q_DUBV is expressed in 1/1000 of a percent.
  localparam longint unsigned QDUBV_SCALE = 100_000;

  function automatic longint unsigned mted(int unsigned n, int unsigned qdubv_mpct);
    longint unsigned full_scale;
    full_scale = (64'd1 << n) - 64'd1;
    return (full_scale * longint'(qdubv_mpct)) / QDUBV_SCALE;
  endfunction

  function automatic int unsigned floor_log2(longint unsigned v);
    int unsigned r;
    r = 0;
    while ((v >> (r + 1)) != 0) r++;
    return r;
  endfunction

  // k = floor(log2(MTED)), limited to 0 .. n-1 so the voted part keeps >= 1 bit.
  function automatic int unsigned k_from_qdubv(int unsigned n, int unsigned qdubv_mpct);
    longint unsigned m;
    int unsigned k;
    m = mted(n, qdubv_mpct);
    if (m == 0) return 0;
    k = floor_log2(m);
    if (k > n - 1) k = n - 1;
    return k;
  endfunction

  // Width of an unsigned sum of `terms` products of dw x cw bits.
  function automatic int unsigned acc_width(int unsigned dw, int unsigned cw, int unsigned terms);
    return dw + cw + $clog2(terms);
  endfunction

  // Low bits dropped to bring an acc_w-bit sum to an n-bit module output.
  function automatic int unsigned out_shift(int unsigned acc_w, int unsigned n);
    return (acc_w > n) ? acc_w - n : 0;
  endfunction

  // Variance bound of the module output for k relaxed bits (paper, Eq. 6).
  function automatic real v_ub(int unsigned n, int unsigned k);
    real m;
    m = real'((64'd1 << k) - 64'd1);
    return (real'(n) / real'(n - 1)) * m * m;
  endfunction

  // Mean of v^2 for v uniform on 0 .. m-1.
  function automatic real uni_sq(real m);
    return (m - 1.0) * (2.0 * m - 1.0) / 6.0;
  endfunction

  // Mean squared error a*b - a'*b' of a multiplier whose operands (uniform,
  // dw and cw bits) lose j LSBs:  E[a^2]E[b^2] - 2E[aa']E[bb'] + E[a'^2]E[b'^2].
  function automatic real v_mul(int unsigned dw, int unsigned cw, int unsigned j);
    real s, ea2, eb2, eat2, ebt2, eaat, ebbt;
    s    = real'(64'd1 << j);
    ea2  = uni_sq(real'(64'd1 << dw));
    eb2  = uni_sq(real'(64'd1 << cw));
    eat2 = s * s * uni_sq(real'(64'd1 << (dw - j)));
    ebt2 = s * s * uni_sq(real'(64'd1 << (cw - j)));
    eaat = eat2 + ((s - 1.0) / 2.0) * (s * (real'(64'd1 << (dw - j)) - 1.0) / 2.0);
    ebbt = ebt2 + ((s - 1.0) / 2.0) * (s * (real'(64'd1 << (cw - j)) - 1.0) / 2.0);
    return ea2 * eb2 - 2.0 * eaat * ebbt + eat2 * ebt2;
  endfunction

  // Mean error a*b - a'*b' of the same truncated multiplier.
  function automatic real mu_mul(int unsigned dw, int unsigned cw, int unsigned j);
    real s;
    s = real'(64'd1 << j);
    return (real'((64'd1 << dw) - 1) / 2.0) * (real'((64'd1 << cw) - 1) / 2.0)
         - (s * (real'(64'd1 << (dw - j)) - 1.0) / 2.0) * (s * (real'(64'd1 << (cw - j)) - 1.0) / 2.0);
  endfunction

  // Mean squared error, in output LSBs, of a TERMS-long dot product whose
  // multipliers all drop j input LSBs.
  function automatic real v_dot(int unsigned dw, int unsigned cw, int unsigned terms,
                                int unsigned n, int unsigned j);
    real scale, mu;
    scale = real'(64'd1 << out_shift(acc_width(dw, cw, terms), n));
    mu    = mu_mul(dw, cw, j);
    return (real'(terms) * v_mul(dw, cw, j) + real'(terms) * real'(terms - 1) * mu * mu)
           / (scale * scale);
  endfunction

  // Largest uniform multiplier truncation meeting the variance bound.
  function automatic int unsigned mul_trunc_var(int unsigned dw, int unsigned cw,
                                                int unsigned terms, int unsigned n,
                                                int unsigned k);
    int unsigned j, jmax;
    real bound;
    bound = v_ub(n, k);
    jmax  = ((dw < cw) ? dw : cw) - 1;
    j = 0;
    while (j < jmax && v_dot(dw, cw, terms, n, j + 1) <= bound) j++;
    return j;
  endfunction

  // Largest uniform multiplier truncation meeting the worst-case bound.
  function automatic int unsigned mul_trunc_worst(int unsigned dw, int unsigned cw,
                                                  int unsigned terms, int unsigned n,
                                                  int unsigned k);
    longint unsigned budget, per_lsb;
    int unsigned j, jmax, shift;
    shift   = out_shift(acc_width(dw, cw, terms), n);
    budget  = ((64'd1 << k) - 64'd1) << shift;
    per_lsb = longint'(terms) * ((64'd1 << dw) + (64'd1 << cw));
    jmax    = ((dw < cw) ? dw : cw) - 1;
    j = 0;
    while (j < jmax && (((64'd1 << (j + 1)) - 64'd1) * per_lsb) <= budget) j++;
    return j;
  endfunction

endpackage
