// tb_xrel_fir32_study -- 8-tap FIR filter with 32-bit data, coefficients and
// output, triplicated and voted under bit-flip noise.
//
// Three fir_filter replicas (TAPS = 8, DW = CW = N = 32, exact arithmetic) get
// the same input stream, one sample per clock.  Every bit of each module
// output is flipped independently with probability P_f before the voters,
// the bit-wise noise model used to evaluate approximate voters.  The noisy
// outputs go to a strict word-wise TMR voter (xrel_voter with k = 0) and to
// X-Rel voters with k = 1, 2, 4 and 8.  Each voter is built twice: with
// ZERO_ON_ERROR = 1 (output zero when no two inputs agree) and with
// ZERO_ON_ERROR = 0 (output OM1, the voter's pseudo-code); the source does not
// say which its filter study used.  Runs at P_f = 1 % and 5 %, 4,000 samples
// each.
//
// The filter size, the 32-bit quantisation, the k values and P_f follow the
// evaluation of X-Rel on a FIR filter.  The data is this design's own: the
// source draws the input from [-0.5, 0.5]; the filter here is unsigned, so
// the input and the coefficients are uniform 32-bit words, i.e. that range in
// offset binary, and the coefficients are random.
//
// Checks: every replica's output equals the top 32 bits of a 67-bit
// reference sum kept in the testbench; every voter output and status matches
// the reference vote model; the X-Rel voters reach a PSNR at least that of
// the strict voter and raise fewer errors.  The PSNR (peak 2^32 - 1) of every
// voter is printed.
module tb_xrel_fir32_study;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;

  localparam int unsigned T = 8, W = 32;
  localparam int unsigned NK = 5;
  localparam int unsigned NV = 2 * NK;   // v < NK: zero on error; v >= NK: OM1 on error
  localparam int unsigned KV [NV] = '{0, 1, 2, 4, 8, 0, 1, 2, 4, 8};
  localparam int unsigned SAMPLES = 4000;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic clk = 0, rst_n = 0, in_valid = 0;
  always #5 clk = ~clk;

  logic [W-1:0] x_in = '0;
  logic [W-1:0] coef [T];
  logic [W-1:0] y [3];
  logic [W-1:0] om [3];
  logic [W-1:0] vout [NV];
  logic         verr [NV];
  vote_status_e vst  [NV];

  for (genvar r = 0; r < 3; r++) begin : g_m
    fir_filter #(.TAPS(T), .DW(W), .CW(W), .N(W)) u_fir (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_in(x_in), .coef(coef), .y(y[r])
    );
  end

  for (genvar v = 0; v < NV; v++) begin : g_v
    xrel_voter #(.N(W), .K(KV[v]), .ZERO_ON_ERROR(v < NK)) u_v (
      .om1(om[0]), .om2(om[1]), .om3(om[2]), .out(vout[v]), .error(verr[v]), .status(vst[v])
    );
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int unsigned pf_ppm [2] = '{10_000, 50_000};
    logic [W-1:0] hist [T];
    logic [2*W+2:0] acc;
    logic [W-1:0] exp_y;
    real  sse [NV];
    int   nerr [NV];
    longint unsigned ro;
    int   rs;
    bit   bad_y, bad_v;

    foreach (coef[t]) coef[t] = $urandom;
    foreach (om[r]) om[r] = '0;
    foreach (hist[t]) hist[t] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < 2; p++) begin
      foreach (sse[v]) begin sse[v] = 0.0; nerr[v] = 0; end
      bad_y = 0; bad_v = 0;
      for (int s = 0; s < SAMPLES; s++) begin
        @(negedge clk);
        in_valid = 1;
        x_in = $urandom;
        @(posedge clk);
        #1;
        for (int t = T - 1; t > 0; t--) hist[t] = hist[t-1];
        hist[0] = x_in;
        acc = '0;
        for (int t = 0; t < T; t++) acc += (2*W+3)'(hist[t]) * (2*W+3)'(coef[t]);
        exp_y = W'(acc >> (W + 3));
        for (int r = 0; r < 3; r++) if (y[r] != exp_y) bad_y = 1;
        for (int r = 0; r < 3; r++) om[r] = y[r] ^ W'(noise_mask(W, pf_ppm[p]));
        #1;
        for (int v = 0; v < NV; v++) begin
          ref_vote(W, KV[v], v < NK, longint'(om[0]), longint'(om[1]), longint'(om[2]), ro, rs);
          if (vout[v] != W'(ro) || int'(vst[v]) != rs) bad_v = 1;
          sse[v] += (real'(vout[v]) - real'(exp_y)) ** 2;
          if (verr[v]) nerr[v]++;
        end
      end
      check(!bad_y, $sformatf("replica outputs equal the 67-bit reference, P_f=%0d ppm", pf_ppm[p]));
      check(!bad_v, $sformatf("voter outputs match the model, P_f=%0d ppm", pf_ppm[p]));
      $display("P_f = %0.2f:", pf_ppm[p] / 1.0e6);
      for (int v = 0; v < NV; v++) begin
        real mse, psnr;
        mse  = sse[v] / real'(SAMPLES);
        psnr = (mse > 0.0) ? 10.0 * $log10((2.0 ** W - 1.0) ** 2 / mse) : 999.0;
        if (v == 0) $display("  error output zero:");
        if (v == NK) $display("  error output OM1:");
        $display("    %-6s k = %0d: PSNR %6.2f dB  errors %0d", (v % NK == 0) ? "TMR" : "X-Rel",
                 KV[v], psnr, nerr[v]);
        if (v % NK != 0) begin
          check(sse[v] <= sse[v - v % NK], $sformatf("X-Rel k=%0d PSNR not below TMR", KV[v]));
          check(nerr[v] < nerr[v - v % NK], $sformatf("X-Rel k=%0d raises fewer errors", KV[v]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
