// trunc_multiplier -- approximate multiplier built by truncation.
//
// The J least significant bits of both operands are discarded, so only an
// (AW-J) x (BW-J) multiplier is built; the product is returned at the original
// scale (shifted left by 2J, low 2J bits zero).  J = 0 is an exact multiplier.
// This follows the truncation technique the X-Rel framework uses for
// multiplication nodes; the same J on both operands and unsigned operands are
// this design's choices.
//
// Interface: a (AW bits), b (BW bits) -> prod (AW+BW bits).  Combinational.
module trunc_multiplier #(
  parameter int unsigned AW = 8,
  parameter int unsigned BW = 8,
  parameter int unsigned J  = 0
) (
  input  logic [AW-1:0]    a,
  input  logic [BW-1:0]    b,
  output logic [AW+BW-1:0] prod
);

  initial assert (J < AW && J < BW) else $error("trunc_multiplier: J=%0d too large", J);

  if (J == 0) begin : g_exact
    assign prod = (AW+BW)'(a) * (AW+BW)'(b);
  end else begin : g_trunc
    logic [AW+BW-2*J-1:0] upper_prod;   // the reduced multiplier
    assign upper_prod = (AW+BW-2*J)'(a[AW-1:J]) * (AW+BW-2*J)'(b[BW-1:J]);
    assign prod       = {upper_prod, {(2*J){1'b0}}};
  end

endmodule
