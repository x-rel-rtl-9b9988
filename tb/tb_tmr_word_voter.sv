// tb_tmr_word_voter -- self-checking test of the word-wise TMR voter.
// The two word-wise examples of a 4-bit TMR (one module differing, and all
// three differing) are checked first; then every combination of three 3-bit
// words is compared with a counting reference model, for both settings of
// ZERO_ON_ERROR.
module tb_tmr_word_voter;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [3:0] e1, e2, e3, eo;
  logic       ee;
  vote_status_e es;
  tmr_word_voter #(.W(4)) u_ex (.om1(e1), .om2(e2), .om3(e3), .out(eo), .error(ee), .status(es));

  logic [2:0] a, b, c, o0, o1;
  logic       r0, r1;
  vote_status_e s0, s1;
  tmr_word_voter #(.W(3), .ZERO_ON_ERROR(1'b0)) u_w0 (.om1(a), .om2(b), .om3(c), .out(o0), .error(r0), .status(s0));
  tmr_word_voter #(.W(3), .ZERO_ON_ERROR(1'b1)) u_w1 (.om1(a), .om2(b), .om3(c), .out(o1), .error(r1), .status(s1));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d b=%0d c=%0d", what, a, b, c);
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
    longint unsigned ro;
    int rs;
    // Example 1: M2 = 1001 differs -> 1010, no error.
    e1 = 4'b1010; e2 = 4'b1001; e3 = 4'b1010; #1;
    check(eo == 4'b1010 && !ee && es == VOTE_M2_FAULT, "example 1");
    // Example 2: 1010 / 1011 / 1000 -> Error = 1.
    e1 = 4'b1010; e2 = 4'b1011; e3 = 4'b1000; #1;
    check(ee && es == VOTE_NO_MAJORITY && eo == 4'b1010, "example 2");
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < 8; k++) begin
          a = 3'(i); b = 3'(j); c = 3'(k); #1;
          ref_vote(3, 0, 1'b0, 64'(i), 64'(j), 64'(k), ro, rs);
          check(o0 == 3'(ro) && int'(s0) == rs && r0 == (rs == 4), "zero_on_error=0");
          ref_vote(3, 0, 1'b1, 64'(i), 64'(j), 64'(k), ro, rs);
          check(o1 == 3'(ro) && int'(s1) == rs && r1 == (rs == 4), "zero_on_error=1");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
