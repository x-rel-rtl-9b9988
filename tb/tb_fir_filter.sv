// tb_fir_filter -- self-checking test of the FIR module.
// An exact 8-tap filter and a 64-tap filter with 2-bit multiplier truncation
// are fed a random sample stream with random gaps in in_valid.  The testbench
// keeps its own delay line; after every clock edge the outputs must equal the
// model for the samples taken so far (the new sample counts from the very edge
// that took it), and must not move while in_valid is low.  Reset must clear
// the delay line.
module tb_fir_filter;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [7:0]  x_in = 0;
  logic [7:0]  coef8  [8];
  logic [7:0]  coef64 [64];
  logic [15:0] y8, y64;

  fir_filter #(.TAPS(8)) u8 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .coef(coef8), .y(y8));
  fir_filter #(.TAPS(64), .MUL_J({64{trunc_t'(2)}})) u64 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
                                                          .x_in(x_in), .coef(coef64), .y(y64));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned hist[], c8[], c64[], h8[];
    int unsigned j64[], a64[];
    hist = new[64]; c8 = new[8]; c64 = new[64]; h8 = new[8]; j64 = new[64]; a64 = new[63];
    foreach (hist[i]) hist[i] = 0;
    foreach (j64[i]) j64[i] = 2;
    foreach (a64[i]) a64[i] = 0;
    foreach (coef8[i])  begin c8[i]  = 64'($urandom % 256); coef8[i]  = 8'(c8[i]);  end
    foreach (coef64[i]) begin c64[i] = 64'($urandom % 256); coef64[i] = 8'(c64[i]); end
    repeat (2) @(posedge clk);
    #1; check(y8 == 0 && y64 == 0, "reset clears the delay line");
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      logic [15:0] y8_before, y64_before;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      x_in = (n % 97 < 70) ? 8'($urandom) : 8'hFF;
      y8_before = y8; y64_before = y64;
      @(posedge clk); #1;
      if (in_valid) begin
        for (int t = 63; t > 0; t--) hist[t] = hist[t-1];
        hist[0] = 64'(x_in);
        for (int t = 0; t < 8; t++) h8[t] = hist[t];
        check(y8  == 16'(exact_dot(h8, c8, 3, 16)), "8-tap output");
        check(y64 == 16'(ref_dot(hist, c64, j64, a64, 6, 16)), "64-tap truncated output");
      end else begin
        check(y8 == y8_before && y64 == y64_before, "hold while in_valid is low");
      end
    end
    // Asynchronous reset in the middle of a stream.
    @(negedge clk); rst_n = 0; #1;
    check(y8 == 0 && y64 == 0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
