// tb_trunc_adder -- self-checking test of the truncating adder.
// Three instances (J = 0, 3, 7 at W = 16) are driven with corner and random
// operands; the expected sum masks the J low bits of each operand and adds.
module tb_trunc_adder;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] a, b;
  logic [16:0] s0, s3, s7;

  trunc_adder #(.W(16), .J(0)) u0 (.a(a), .b(b), .sum(s0));
  trunc_adder #(.W(16), .J(3)) u3 (.a(a), .b(b), .sum(s3));
  trunc_adder #(.W(16), .J(7)) u7 (.a(a), .b(b), .sum(s7));

  task automatic check(longint unsigned got, longint unsigned exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  task automatic apply(logic [15:0] va, logic [15:0] vb);
    a = va; b = vb; #1;
    check(64'(s0), longint'(va) + longint'(vb), "J0");
    check(64'(s3), mask_low(64'(va), 3) + mask_low(64'(vb), 3), "J3");
    check(64'(s7), mask_low(64'(va), 7) + mask_low(64'(vb), 7), "J7");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(16'h0000, 16'h0000);
    apply(16'hFFFF, 16'hFFFF);
    apply(16'h0007, 16'h0007);   // vanishes entirely at J = 3
    apply(16'h007F, 16'h0080);
    repeat (3000) apply(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
