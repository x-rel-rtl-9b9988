// xrel_ref_pkg -- reference models used by the testbenches.
//
// Written independently of the RTL: truncation is modelled by masking the
// dropped low bits of each operand, sums and products are formed in 64-bit
// integers, and the voter is modelled by counting how many inputs share each
// input's upper bits.  The checks compare the RTL against these models.
package xrel_ref_pkg;

  function automatic longint unsigned mask_low(longint unsigned v, int unsigned j);
    return v & ~((64'd1 << j) - 64'd1);
  endfunction

  // Approximate dot product: multiplier i drops mj[i] input LSBs, adder i
  // (adding product i+1 to the running sum) drops aj[i] input LSBs.  The
  // result is shifted right by `shift` and cut to n bits.
  function automatic longint unsigned ref_dot(longint unsigned x[], longint unsigned c[],
                                              int unsigned mj[], int unsigned aj[],
                                              int unsigned shift, int unsigned n);
    longint unsigned acc, p;
    acc = mask_low(x[0], mj[0]) * mask_low(c[0], mj[0]);
    for (int i = 1; i < x.size(); i++) begin
      p   = mask_low(x[i], mj[i]) * mask_low(c[i], mj[i]);
      acc = mask_low(acc, aj[i-1]) + mask_low(p, aj[i-1]);
    end
    return (acc >> shift) & ((64'd1 << n) - 64'd1);
  endfunction

  // Exact dot product, same scaling.
  function automatic longint unsigned exact_dot(longint unsigned x[], longint unsigned c[],
                                                int unsigned shift, int unsigned n);
    longint unsigned acc;
    acc = 0;
    foreach (x[i]) acc += x[i] * c[i];
    return (acc >> shift) & ((64'd1 << n) - 64'd1);
  endfunction

  // Voter model.  status: 0 agree, 1 M3 bad, 2 M1 bad, 3 M2 bad, 4 no majority.
  function automatic void ref_vote(int unsigned n, int unsigned k, bit zero_on_error,
                                   longint unsigned o1, longint unsigned o2, longint unsigned o3,
                                   output longint unsigned out, output int status);
    longint unsigned u[3], low, sel;
    int cnt[3];
    u[0] = o1 >> k; u[1] = o2 >> k; u[2] = o3 >> k;
    low  = o1 & ((64'd1 << k) - 64'd1);
    foreach (cnt[i]) begin
      cnt[i] = 0;
      foreach (u[j]) if (u[j] == u[i]) cnt[i]++;
    end
    if (cnt[0] == 3)                    begin status = 0; sel = u[0]; end
    else if (cnt[0] == 2 && cnt[2] == 1) begin status = 1; sel = u[0]; end
    else if (cnt[1] == 2 && cnt[0] == 1) begin status = 2; sel = u[1]; end
    else if (cnt[2] == 2 && cnt[1] == 1) begin status = 3; sel = u[2]; end
    else                                 begin status = 4; sel = u[0]; end
    if (status == 4 && zero_on_error) out = 0;
    else out = (sel << k) | low;
    out &= (64'd1 << n) - 64'd1;
  endfunction

  // Bit-flip mask with each of n bits set with probability pf_ppm / 1e6.
  function automatic longint unsigned noise_mask(int unsigned n, int unsigned pf_ppm);
    longint unsigned m;
    int unsigned     r;
    m = 0;
    for (int b = 0; b < n; b++) begin
      r = $urandom % 1_000_000;
      if (r < pf_ppm) m |= (64'd1 << b);
    end
    return m;
  endfunction

endpackage
