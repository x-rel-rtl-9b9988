// dot_product -- truncation-approximated multiply-add data-flow graph.
//
// Computes y = sum_i x[i] * c[i] over TERMS unsigned terms.  The data-flow
// graph is TERMS multiply nodes feeding a linear chain of TERMS-1 add nodes
// (direct form).  Every node has its own truncation amount, MUL_J[i] for the
// i-th multiplier and ADD_J[i] for the adder that adds product i+1, which is
// how the X-Rel framework approximates the replicated modules of a TMR system:
// a design-time optimisation picks, per node, how many input LSBs to drop so
// that the module's output error stays within the voter's relaxed bits.
// The chain shape and the scaling are this design's choices: the full sum is
// ACC_W = DW + CW + clog2(TERMS) bits wide and the module output y is its N
// most significant bits (zero-extended when ACC_W <= N).
//
// Interface: x[TERMS] (DW bits), c[TERMS] (CW bits) -> y (N bits).
// Purely combinational.
module dot_product
  import xrel_pkg::*;
#(
  parameter int unsigned TERMS        = 8,
  parameter int unsigned DW           = 8,
  parameter int unsigned CW           = 8,
  parameter int unsigned N            = 16,
  parameter trunc_t [TERMS-1:0] MUL_J = '0,
  parameter trunc_t [TERMS-2:0] ADD_J = '0
) (
  input  logic [DW-1:0] x [TERMS],
  input  logic [CW-1:0] c [TERMS],
  output logic [N-1:0]  y
);

  localparam int unsigned ACC_W = acc_width(DW, CW, TERMS);
  localparam int unsigned SHIFT = out_shift(ACC_W, N);

  initial assert (TERMS >= 2) else $error("dot_product: TERMS must be at least 2");

  logic [DW+CW-1:0] prod [TERMS];
  logic [ACC_W-1:0] acc  [TERMS];

  for (genvar i = 0; i < TERMS; i++) begin : g_mul
    trunc_multiplier #(.AW(DW), .BW(CW), .J(int'(MUL_J[i]))) u_mul (
      .a(x[i]), .b(c[i]), .prod(prod[i])
    );
  end

  assign acc[0] = ACC_W'(prod[0]);

  for (genvar i = 1; i < TERMS; i++) begin : g_add
    logic [ACC_W:0] sum;
    trunc_adder #(.W(ACC_W), .J(int'(ADD_J[i-1]))) u_add (
      .a(acc[i-1]), .b(ACC_W'(prod[i])), .sum(sum)
    );
    // The exact sum of i+1 products fits ACC_W bits and truncation only
    // lowers it, so the carry-out is always zero.
    assign acc[i] = sum[ACC_W-1:0];
  end

  assign y = N'(acc[TERMS-1] >> SHIFT);

endmodule
