// tb_xrel_noise_study -- the voter under bit-flip noise, on image-sized data.
//
// A 256 x 256 x 3 test image with 8-bit channels (196,608 values) is
// generated here: smooth gradients with a little texture.  Each channel value
// is given to three voter inputs, and every bit of every input is flipped
// independently with probability P_f, the bit-wise noise model used to
// evaluate approximate voters.  On an error the voters output zero
// (ZERO_ON_ERROR = 1), as in that evaluation.
//
// Part 1 (image voting): X-Rel voter N = 8, Q_DUBV = 10 % (k = 4) against a
// strict word-wise TMR voter (same block with k = 0), P_f = 1 % and 5 %.
// Part 2 (MSE trade-off): X-Rel voters with k = 1..7 against the k = 0 voter,
// P_f = 1 %, 5 % and 10 %; the MSE ratio MSE(X-Rel)/MSE(TMR) is reported.
//
// Checks: every output of every voter matches the reference vote model; the
// X-Rel MSE is below the strict TMR MSE in every case; X-Rel raises fewer
// errors.  MSE ratios, error counts and the false positives (output upper
// bits wrong with no error raised, when two inputs share the same upper
// corruption) are printed.
module tb_xrel_noise_study;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [7:0]   om [3];
  logic [7:0]   vout [8];      // index = k; k = 0 is the strict TMR voter
  logic         verr [8];
  vote_status_e vst  [8];

  for (genvar k = 0; k < 8; k++) begin : g_v
    xrel_voter #(.N(8), .K(k), .ZERO_ON_ERROR(1'b1)) u_v (
      .om1(om[0]), .om2(om[1]), .om3(om[2]), .out(vout[k]), .error(verr[k]), .status(vst[k])
    );
  end

  // The k = 4 voter of part 1 must be the one the quality bound gives.
  xrel_voter #(.N(8), .QDUBV_MPCT(10_000), .ZERO_ON_ERROR(1'b1)) u_q10 (
    .om1(om[0]), .om2(om[1]), .om3(om[2]), .out(), .error(), .status()
  );

  function automatic int unsigned pixel(int x, int y, int c);
    return (x * (c + 1) + y * (3 - c) + ((x ^ y) & 15) + c * 60) & 255;
  endfunction

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int unsigned pf_ppm [3] = '{10_000, 50_000, 100_000};
    real         sse [8];
    int          nerr [8];
    int          fpos [8];
    longint unsigned ro, n;
    int rs;
    bit mismatch;

    checks++;
    if (u_q10.K != 4) begin failures++; $display("FAIL k for N=8, Q_DUBV=10%%"); end

    for (int p = 0; p < 3; p++) begin
      foreach (sse[k]) begin sse[k] = 0.0; nerr[k] = 0; fpos[k] = 0; end
      mismatch = 0;
      for (int y = 0; y < 256; y++)
        for (int x = 0; x < 256; x++)
          for (int c = 0; c < 3; c++) begin
            int unsigned v;
            v = pixel(x, y, c);
            for (int r = 0; r < 3; r++) om[r] = 8'(v ^ noise_mask(8, pf_ppm[p]));
            #1;
            for (int k = 0; k < 8; k++) begin
              ref_vote(8, k, 1'b1, 64'(om[0]), 64'(om[1]), 64'(om[2]), ro, rs);
              if (vout[k] != 8'(ro) || int'(vst[k]) != rs) mismatch = 1;
              sse[k] += (real'(vout[k]) - real'(v)) ** 2;
              if (verr[k]) nerr[k]++;
              else if ((32'(vout[k]) >> k) != (v >> k)) fpos[k]++;
            end
          end
      checks++;
      if (mismatch) begin failures++; $display("FAIL voter output differs from model, P_f=%0d ppm", pf_ppm[p]); end
      $display("P_f = %0.2f: strict TMR MSE %0.1f, errors %0d, false positives %0d",
               pf_ppm[p] / 1.0e6, sse[0] / 196608.0, nerr[0], fpos[0]);
      for (int k = 1; k < 8; k++) begin
        $display("  k = %0d: MSE %0.1f  MSE ratio %0.3f  errors %0d  false positives %0d",
                 k, sse[k] / 196608.0, sse[k] / sse[0], nerr[k], fpos[k]);
        checks++;
        if (!(sse[k] < sse[0])) begin failures++; $display("FAIL X-Rel MSE not below TMR, k=%0d", k); end
        checks++;
        if (!(nerr[k] < nerr[0])) begin failures++; $display("FAIL X-Rel errors not below TMR, k=%0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
