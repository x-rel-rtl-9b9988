// trunc_adder -- approximate adder built by truncation.
//
// The J least significant bits of both operands are discarded and only a
// (W-J)-bit adder is built for the remaining upper parts; the sum is returned
// at the original scale, so its J low bits are zero.  With J = 0 it is an
// exact W-bit adder.  This is the truncation technique the X-Rel framework
// applies to addition nodes of an application's data-flow graph ("j LSB bits
// of the inputs of node i are truncated"); the per-node J is an output of the
// design-time optimisation.  Operands are unsigned (this design's choice).
//
// Interface: a, b (W bits) -> sum (W+1 bits).  Purely combinational.
module trunc_adder #(
  parameter int unsigned W = 16,
  parameter int unsigned J = 0
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W:0]   sum
);

  initial assert (J < W) else $error("trunc_adder: J=%0d must be below W=%0d", J, W);

  if (J == 0) begin : g_exact
    assign sum = {1'b0, a} + {1'b0, b};
  end else begin : g_trunc
    logic [W-J:0] upper_sum;    // the reduced (W-J)-bit adder
    assign upper_sum = {1'b0, a[W-1:J]} + {1'b0, b[W-1:J]};
    assign sum       = {upper_sum, {J{1'b0}}};
  end

endmodule
