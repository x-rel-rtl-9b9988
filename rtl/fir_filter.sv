// fir_filter -- TAPS-tap FIR filter, one replicated module of an X-Rel TMR
// system (the paper's 8-tap and 64-tap FIR benchmarks).
//
// A delay line holds the last TAPS samples (x[n] in tap 0, x[n-TAPS+1] in the
// last tap).  The output y[n] = sum_t coef[t] * x[n-t] is formed by a
// truncation-approximated dot_product whose per-node truncations MUL_J/ADD_J
// come from the design-time approximation step, and is the N most significant
// bits of the full-precision sum.  Sample and coefficient widths, unsigned
// data, programmable coefficients and the delay-line reset are this design's
// choices; the paper names the benchmark and fixes N = 16.
//
// Timing: x_in is shifted in at the rising clock edge where in_valid = 1; y
// reflects the new delay line combinationally after that edge.  rst_n is an
// asynchronous active-low reset that clears the delay line.
module fir_filter
  import xrel_pkg::*;
#(
  parameter int unsigned TAPS = 8,
  parameter int unsigned DW   = 8,
  parameter int unsigned CW   = 8,
  parameter int unsigned N    = 16,
  parameter trunc_t [TAPS-1:0] MUL_J = '0,
  parameter trunc_t [TAPS-2:0] ADD_J = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] x_in,
  input  logic [CW-1:0] coef [TAPS],
  output logic [N-1:0]  y
);

  logic [DW-1:0] dly [TAPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < TAPS; t++) dly[t] <= '0;
    end else if (in_valid) begin
      dly[0] <= x_in;
      for (int t = 1; t < TAPS; t++) dly[t] <= dly[t-1];
    end
  end

  dot_product #(
    .TERMS(TAPS), .DW(DW), .CW(CW), .N(N), .MUL_J(MUL_J), .ADD_J(ADD_J)
  ) u_dp (
    .x(dly), .c(coef), .y(y)
  );

endmodule
