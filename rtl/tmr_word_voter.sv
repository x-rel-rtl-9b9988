// tmr_word_voter -- word-wise majority voter for triple modular redundancy.
//
// Compares three W-bit words as whole words (not bit by bit) and returns the
// word that at least two of them share.  The case order, which input is
// forwarded in each case and the "module i is erroneous" indication follow the
// voter pseudo-code printed with the X-Rel voter:
//   OM1==OM2==OM3 -> OM1             (status AGREE)
//   OM1==OM2!=OM3 -> OM1             (M3 erroneous)
//   OM2==OM3!=OM1 -> OM2             (M1 erroneous)
//   OM1==OM3!=OM2 -> OM3             (M2 erroneous)
//   otherwise     -> OM1, error = 1  (no majority)
// The paper's image-processing study instead says the output is set to zero
// on an error; ZERO_ON_ERROR = 1 selects that behaviour (default 0 keeps the
// pseudo-code's OM1).  The status encoding is this design's choice.
//
// In the X-Rel voter this block is instantiated with W = N - k, voting only
// the upper bits.  Purely combinational, no clock.
module tmr_word_voter
  import xrel_pkg::*;
#(
  parameter int unsigned W             = 4,
  parameter bit          ZERO_ON_ERROR = 1'b0
) (
  input  logic [W-1:0]  om1,
  input  logic [W-1:0]  om2,
  input  logic [W-1:0]  om3,
  output logic [W-1:0]  out,
  output logic          error,
  output vote_status_e  status
);

  logic eq12, eq23, eq13;
  assign eq12 = (om1 == om2);
  assign eq23 = (om2 == om3);
  assign eq13 = (om1 == om3);

  always_comb begin
    if (eq12 && eq23) begin
      out = om1; status = VOTE_AGREE;
    end else if (eq12) begin
      out = om1; status = VOTE_M3_FAULT;
    end else if (eq23) begin
      out = om2; status = VOTE_M1_FAULT;
    end else if (eq13) begin
      out = om3; status = VOTE_M2_FAULT;
    end else begin
      out = ZERO_ON_ERROR ? '0 : om1; status = VOTE_NO_MAJORITY;
    end
  end

  assign error = (status == VOTE_NO_MAJORITY);

  // Whenever no error is reported, the output equals at least two inputs.
  always_comb begin
    if (!error)
      assert ((out == om1) + (out == om2) + (out == om3) >= 2)
        else $error("tmr_word_voter: output is not a majority value");
  end

endmodule
