// matmul -- DIM x DIM matrix multiplication, one replicated module of an
// X-Rel TMR system (the paper's 8 x 8 MM benchmark).
//
// C = A x B with unsigned DW-bit elements.  Each of the DIM*DIM outputs is a
// separate truncation-approximated dot_product of row i of A and column j of
// B, so every output is its own small data-flow graph; all outputs share the
// same per-node truncation (MUL_J, ADD_J) because their graphs are identical.
// Each output is the N most significant bits of its full-precision sum.  The
// fully parallel, combinational organisation and the element width are this
// design's choices.
//
// Interface: a[DIM][DIM], b[DIM][DIM] (DW bits) -> c[DIM][DIM] (N bits),
// a[i][j] is row i, column j.  Purely combinational.
module matmul
  import xrel_pkg::*;
#(
  parameter int unsigned DIM = 8,
  parameter int unsigned DW  = 8,
  parameter int unsigned N   = 16,
  parameter trunc_t [DIM-1:0] MUL_J = '0,
  parameter trunc_t [DIM-2:0] ADD_J = '0
) (
  input  logic [DW-1:0] a [DIM][DIM],
  input  logic [DW-1:0] b [DIM][DIM],
  output logic [N-1:0]  c [DIM][DIM]
);

  for (genvar i = 0; i < DIM; i++) begin : g_row
    for (genvar j = 0; j < DIM; j++) begin : g_col
      logic [DW-1:0] col [DIM];
      for (genvar t = 0; t < DIM; t++) begin : g_t
        assign col[t] = b[t][j];
      end
      dot_product #(
        .TERMS(DIM), .DW(DW), .CW(DW), .N(N), .MUL_J(MUL_J), .ADD_J(ADD_J)
      ) u_dp (
        .x(a[i]), .c(col), .y(c[i][j])
      );
    end
  end

endmodule
