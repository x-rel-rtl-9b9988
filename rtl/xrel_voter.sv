// xrel_voter -- the X-Rel approximate TMR voter.
//
// Main idea (follows the paper): the application can tolerate an output error
// distance up to MTED = (2^N-1) * Q_DUBV/100.  Rounding MTED down to a power
// of two, 2^K, gives K low bits whose value never matters for the quality
// bound.  The voter therefore drops those K bits from all three module outputs
// ("Trun." blocks), majority-votes only the N-K upper bits with an ordinary
// word-wise TMR voter, and passes the K low bits of module 1 (OM1) straight to
// Out(K-1:0).  Small disagreements confined to the low bits - e.g. from
// diverse or approximate replicas, or soft errors in low bits - therefore no
// longer break the vote (no "strict majority" problem), and the voter
// shrinks from N to N-K bits.
//
// K is computed at elaboration from N and QDUBV_MPCT (Q_DUBV in 0.001 %
// units) with xrel_pkg::k_from_qdubv(); it can also be forced through K.
// Defaults N = 16, Q_DUBV = 12.5 % (K = 12) are the paper's benchmark width and
// its largest evaluated bound.
//
// Interface: om1..om3 (N bits) -> out (N bits), error, status.  Combinational.
module xrel_voter
  import xrel_pkg::*;
#(
  parameter int unsigned N             = 16,
  parameter int unsigned QDUBV_MPCT    = 12_500,
  parameter int unsigned K             = k_from_qdubv(N, QDUBV_MPCT),
  parameter bit          ZERO_ON_ERROR = 1'b0
) (
  input  logic [N-1:0]  om1,
  input  logic [N-1:0]  om2,
  input  logic [N-1:0]  om3,
  output logic [N-1:0]  out,
  output logic          error,
  output vote_status_e  status
);

  initial assert (K < N) else $error("xrel_voter: K=%0d must be below N=%0d", K, N);

  logic [N-K-1:0] upper_out;

  // (N-K)-bit majority-based TMR voter on the truncated inputs.
  tmr_word_voter #(
    .W             (N - K),
    .ZERO_ON_ERROR (ZERO_ON_ERROR)
  ) u_upper_voter (
    .om1    (om1[N-1:K]),
    .om2    (om2[N-1:K]),
    .om3    (om3[N-1:K]),
    .out    (upper_out),
    .error  (error),
    .status (status)
  );

  if (K == 0) begin : g_exact
    assign out = upper_out;
  end else begin : g_relaxed
    logic [K-1:0] lower_out;
    // On an error with ZERO_ON_ERROR the whole word is cleared.
    assign lower_out = (ZERO_ON_ERROR && error) ? '0 : om1[K-1:0];
    assign out       = {upper_out, lower_out};
  end

endmodule
