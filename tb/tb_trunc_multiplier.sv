// tb_trunc_multiplier -- exhaustive self-checking test of the truncating
// multiplier for 8 x 8 bits at J = 0, 2 and 5: the expected product is the
// product of the operands with their J low bits masked to zero.
module tb_trunc_multiplier;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0]  a, b;
  logic [15:0] p0, p2, p5;

  trunc_multiplier #(.AW(8), .BW(8), .J(0)) u0 (.a(a), .b(b), .prod(p0));
  trunc_multiplier #(.AW(8), .BW(8), .J(2)) u2 (.a(a), .b(b), .prod(p2));
  trunc_multiplier #(.AW(8), .BW(8), .J(5)) u5 (.a(a), .b(b), .prod(p5));

  task automatic check(longint unsigned got, longint unsigned exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d b=%0d got=%0d exp=%0d", what, a, b, got, exp);
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
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b = 8'(j); #1;
        check(64'(p0), longint'(i) * longint'(j), "J0");
        check(64'(p2), mask_low(64'(i), 2) * mask_low(64'(j), 2), "J2");
        check(64'(p5), mask_low(64'(i), 5) * mask_low(64'(j), 5), "J5");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
