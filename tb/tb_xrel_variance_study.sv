// tb_xrel_variance_study -- module approximation against the quality bound,
// swept over the relaxed-bit count k = 1 .. 12 (N = 16).
//
// For each benchmark data-flow graph (8-term dot product of the 8-tap FIR and
// of every 8 x 8 MM element, the 64-tap FIR, the 9-term SMT) and each k, one
// dot_product instance is built with the default truncation
// mul_trunc_var(k) and compared with an exact instance on uniformly random
// 8-bit operands.  Checked for every (benchmark, k):
//  * the measured mean squared output error is at most
//    v_UB = N/(N-1)*(2^k-1)^2, the module bound the quality bound implies;
//  * it matches the package's closed-form prediction v_dot within 10 %;
//  * the chosen truncation is the largest allowed: one more dropped LSB
//    would push the prediction over v_UB (unless the operand width is used up);
//  * the truncation never decreases as k grows;
//  * v_UB itself matches the published table of bounds for N = 16 to its
//    three printed digits.  The row k = 10 is printed there as 1.17E+06,
//    which its own formula does not give (1.12E+06); it is reported, not
//    counted as a failure.
// The table it prints is this design's counterpart of the paper's list of
// module variances under v_UB; the sweep itself is this design's choice.
module tb_xrel_variance_study;
  import xrel_pkg::*;

  localparam int unsigned N = 16, DW = 8;
  localparam int unsigned KMAX = 12;
  localparam int unsigned SAMPLES = 6000;
  localparam int unsigned NB = 3;
  localparam int unsigned TERMS [NB] = '{8, 64, 9};
  // Published v_UB for N = 16, k = 1 .. 12.
  localparam real VUB_TABLE [1:KMAX] = '{1.06e0, 9.60e0, 5.22e1, 2.40e2, 1.03e3, 4.23e3,
                                          1.72e4, 6.94e4, 2.79e5, 1.17e6, 4.47e6, 1.79e7};

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0]  x8 [8],  c8 [8];
  logic [7:0]  x64 [64], c64 [64];
  logic [7:0]  x9 [9],  c9 [9];
  logic [15:0] e8, e64, e9;
  logic [15:0] y8 [1:KMAX], y64 [1:KMAX], y9 [1:KMAX];

  dot_product #(.TERMS(8))  u_e8  (.x(x8),  .c(c8),  .y(e8));
  dot_product #(.TERMS(64)) u_e64 (.x(x64), .c(c64), .y(e64));
  dot_product #(.TERMS(9))  u_e9  (.x(x9),  .c(c9),  .y(e9));

  for (genvar g = 1; g <= KMAX; g++) begin : g_k
    localparam int unsigned J8  = mul_trunc_var(DW, DW, 8, N, g);
    localparam int unsigned J64 = mul_trunc_var(DW, DW, 64, N, g);
    localparam int unsigned J9  = mul_trunc_var(DW, DW, 9, N, g);
    dot_product #(.TERMS(8),  .MUL_J({8{trunc_t'(J8)}}))   u_a8  (.x(x8),  .c(c8),  .y(y8[g]));
    dot_product #(.TERMS(64), .MUL_J({64{trunc_t'(J64)}})) u_a64 (.x(x64), .c(c64), .y(y64[g]));
    dot_product #(.TERMS(9),  .MUL_J({9{trunc_t'(J9)}}))   u_a9  (.x(x9),  .c(c9),  .y(y9[g]));
  end

  function automatic real sq(logic [15:0] a, logic [15:0] b);
    real d;
    d = real'(a) - real'(b);
    return d * d;
  endfunction

  initial begin
    real acc [NB][1:KMAX];
    int unsigned j [NB][1:KMAX];
    for (int b = 0; b < NB; b++)
      for (int k = 1; k <= KMAX; k++) begin
        acc[b][k] = 0.0;
        j[b][k]   = mul_trunc_var(DW, DW, TERMS[b], N, k);
      end

    for (int s = 0; s < SAMPLES; s++) begin
      foreach (x8[i])  begin x8[i]  = 8'($urandom); c8[i]  = 8'($urandom); end
      foreach (x64[i]) begin x64[i] = 8'($urandom); c64[i] = 8'($urandom); end
      foreach (x9[i])  begin x9[i]  = 8'($urandom); c9[i]  = 8'($urandom); end
      #1;
      for (int k = 1; k <= KMAX; k++) begin
        acc[0][k] += sq(y8[k], e8);
        acc[1][k] += sq(y64[k], e64);
        acc[2][k] += sq(y9[k], e9);
      end
    end

    $display("  k      v_UB    | 8-term j  MSE        | 64-term j  MSE        | 9-term j  MSE");
    for (int k = 1; k <= KMAX; k++) begin
      real v [NB];
      for (int b = 0; b < NB; b++) v[b] = acc[b][k] / real'(SAMPLES);
      $display("%3d  %11.4e |    %0d    %11.4e |     %0d    %11.4e |    %0d    %11.4e",
               k, v_ub(N, k), j[0][k], v[0], j[1][k], v[1], j[2][k], v[2]);
      for (int b = 0; b < NB; b++) begin
        real p;
        p = v_dot(DW, DW, TERMS[b], N, j[b][k]);
        check(v[b] <= v_ub(N, k), $sformatf("measured MSE within v_UB (terms %0d, k %0d)", TERMS[b], k));
        // Exact modules (j = 0) have zero error; otherwise compare with the model.
        if (j[b][k] == 0) check(v[b] == 0.0, $sformatf("exact module (terms %0d, k %0d)", TERMS[b], k));
        else check(v[b] >= 0.9 * p && v[b] <= 1.1 * p,
                   $sformatf("MSE matches prediction (terms %0d, k %0d)", TERMS[b], k));
        check(j[b][k] == DW - 1 || v_dot(DW, DW, TERMS[b], N, j[b][k] + 1) > v_ub(N, k),
              $sformatf("largest allowed truncation (terms %0d, k %0d)", TERMS[b], k));
        if (k > 1) check(j[b][k] >= j[b][k-1], "truncation grows with k");
      end
    end
    check(j[0][12] > 0 && j[1][12] > 0 && j[2][12] > 0, "k = 12 modules are approximate");

    for (int k = 1; k <= KMAX; k++) begin
      real r;
      r = v_ub(N, k) / VUB_TABLE[k];
      if (k == 10) $display("v_UB k = 10: computed %e, published %e", v_ub(N, k), VUB_TABLE[k]);
      else check(r > 0.99 && r < 1.01, $sformatf("v_UB matches the published bound, k %0d", k));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
