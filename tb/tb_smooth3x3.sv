// tb_smooth3x3 -- self-checking test of the 3x3 smoothing module.
// A binomial kernel (1 2 1 / 2 4 2 / 1 2 1, weights summing to 16, so the
// 4 dropped low bits of the 20-bit sum divide by 16) and random kernels are applied to random
// windows, flat windows and an edge; an exact and a truncating (J = 3)
// instance are compared with the model.  For the binomial kernel on a flat
// window the exact output must equal the pixel value.
module tb_smooth3x3;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0]  win [9];
  logic [7:0]  w   [9];
  logic [15:0] y_ex, y_tr;

  smooth3x3 u_exact (.win(win), .w(w), .y(y_ex));
  smooth3x3 #(.MUL_J({9{trunc_t'(3)}})) u_trunc (.win(win), .w(w), .y(y_tr));

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
    longint unsigned vw[], vk[];
    int unsigned mj[], aj[];
    static int unsigned binom [9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};
    vw = new[9]; vk = new[9]; mj = new[9]; aj = new[8];
    foreach (mj[i]) mj[i] = 3;
    foreach (aj[i]) aj[i] = 0;
    for (int it = 0; it < 3000; it++) begin
      int flat;
      flat = $urandom % 256;
      for (int i = 0; i < 9; i++) begin
        vk[i] = (it < 1500) ? 64'(binom[i]) : 64'($urandom % 256);
        case (it % 3)
          0: vw[i] = 64'(flat);
          1: vw[i] = (i % 3 == 0) ? 0 : 255;
          default: vw[i] = 64'($urandom % 256);
        endcase
        win[i] = 8'(vw[i]); w[i] = 8'(vk[i]);
      end
      #1;
      check(y_ex == 16'(exact_dot(vw, vk, 4, 16)), "exact output");
      check(y_tr == 16'(ref_dot(vw, vk, mj, aj, 4, 16)), "truncated output");
      if (it < 1500 && it % 3 == 0) check(y_ex == 16'(flat), "flat window passes unchanged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
