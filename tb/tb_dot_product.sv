// tb_dot_product -- self-checking test of the truncated multiply-add DFG.
// One exact instance and one with a different truncation on every node are
// driven with random 8-term vectors; results are compared with a model that
// masks the dropped bits of each operand.  A third instance uses the
// package's worst-case rule for k = 12 and is checked against the exact result:
// its error must stay below 2^12.
module tb_dot_product;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;

  localparam int unsigned T = 8;
  localparam int unsigned SH = 3;                       // 19-bit sum -> 16 bits
  localparam trunc_t [T-1:0] MJ = {5'd0, 5'd1, 5'd2, 5'd3, 5'd1, 5'd0, 5'd4, 5'd2};
  localparam trunc_t [T-2:0] AJ = {5'd5, 5'd0, 5'd2, 5'd1, 5'd3, 5'd0, 5'd6};
  localparam int unsigned JU = mul_trunc_worst(8, 8, T, 16, 12);

  logic [7:0]  x [T];
  logic [7:0]  c [T];
  logic [15:0] y_exact, y_apx, y_uni;

  dot_product #(.TERMS(T)) u_exact (.x(x), .c(c), .y(y_exact));
  dot_product #(.TERMS(T), .MUL_J(MJ), .ADD_J(AJ)) u_apx (.x(x), .c(c), .y(y_apx));
  dot_product #(.TERMS(T), .MUL_J({T{trunc_t'(JU)}})) u_uni (.x(x), .c(c), .y(y_uni));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned vx[], vc[], e, d;
    int unsigned mj[], aj[], uj[], zj[];
    static int differs = 0;
    vx = new[T]; vc = new[T]; mj = new[T]; aj = new[T-1]; uj = new[T]; zj = new[T-1];
    foreach (mj[i]) begin mj[i] = 32'(MJ[i]); uj[i] = JU; end
    foreach (zj[i]) zj[i] = 0;
    foreach (aj[i]) aj[i] = 32'(AJ[i]);
    check(JU == 3, "default truncation for 8 taps at k = 12");
    for (int it = 0; it < 3000; it++) begin
      for (int i = 0; i < T; i++) begin
        vx[i] = (it % 50 == 0) ? 255 : 64'($urandom % 256);
        vc[i] = (it % 50 == 0) ? 255 : 64'($urandom % 256);
        x[i] = 8'(vx[i]); c[i] = 8'(vc[i]);
      end
      #1;
      e = exact_dot(vx, vc, SH, 16);
      check(y_exact == 16'(e), "exact instance");
      check(y_apx == 16'(ref_dot(vx, vc, mj, aj, SH, 16)), "per-node truncation");
      check(y_uni == 16'(ref_dot(vx, vc, uj, zj, SH, 16)), "uniform truncation");
      d = (e > 64'(y_uni)) ? e - 64'(y_uni) : 64'(y_uni) - e;
      check(d < (64'd1 << 12), "error bound 2^k");
      if (y_apx != y_exact) differs++;
    end
    check(differs > 0, "truncation changes some results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
