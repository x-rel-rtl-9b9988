// tb_matmul -- self-checking test of the 8 x 8 matrix-multiply module.
// Random matrices (and all-ones / all-max corners) go into an exact instance
// and one whose multipliers drop 2 input LSBs; each of the 64 outputs is
// compared with an independently computed row-by-column product.
module tb_matmul;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int D = 8;

  logic [7:0]  a [D][D];
  logic [7:0]  b [D][D];
  logic [15:0] c_ex [D][D];
  logic [15:0] c_tr [D][D];

  matmul u_exact (.a(a), .b(b), .c(c_ex));
  matmul #(.MUL_J({D{trunc_t'(2)}})) u_trunc (.a(a), .b(b), .c(c_tr));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned row[], col[];
    int unsigned mj[], aj[];
    row = new[D]; col = new[D]; mj = new[D]; aj = new[D-1];
    foreach (mj[i]) mj[i] = 2;
    foreach (aj[i]) aj[i] = 0;
    for (int it = 0; it < 60; it++) begin
      for (int i = 0; i < D; i++)
        for (int j = 0; j < D; j++) begin
          a[i][j] = (it == 0) ? 8'hFF : (it == 1) ? 8'd1 : 8'($urandom);
          b[i][j] = (it == 0) ? 8'hFF : (it == 1) ? 8'(i + j) : 8'($urandom);
        end
      #1;
      for (int i = 0; i < D; i++)
        for (int j = 0; j < D; j++) begin
          for (int t = 0; t < D; t++) begin row[t] = 64'(a[i][t]); col[t] = 64'(b[t][j]); end
          check(c_ex[i][j] == 16'(exact_dot(row, col, 3, 16)), "exact element");
          check(c_tr[i][j] == 16'(ref_dot(row, col, mj, aj, 3, 16)), "truncated element");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
