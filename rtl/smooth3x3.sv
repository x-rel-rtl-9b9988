// smooth3x3 -- 3 x 3 smoothing filter, one replicated module of an X-Rel TMR
// system (the paper's SMT benchmark).
//
// The output pixel is the weighted sum of a 3 x 3 window, y = sum w[i]*win[i]
// for i = 0..8 in row-major order, formed by a truncation-approximated
// dot_product and returned as the N most significant bits of the full sum.
// The kernel is not fixed in hardware: any low-pass kernel (box, binomial)
// is loaded through w.  The window is supplied ready-made; the line buffers
// that would build it from a pixel stream are outside this block.  Kernel
// ports, widths and scaling are this design's choices.
//
// Interface: win[9] (DW bits), w[9] (CW bits) -> y (N bits).  Combinational.
module smooth3x3
  import xrel_pkg::*;
#(
  parameter int unsigned DW = 8,
  parameter int unsigned CW = 8,
  parameter int unsigned N  = 16,
  parameter trunc_t [8:0] MUL_J = '0,
  parameter trunc_t [7:0] ADD_J = '0
) (
  input  logic [DW-1:0] win [9],
  input  logic [CW-1:0] w   [9],
  output logic [N-1:0]  y
);

  dot_product #(
    .TERMS(9), .DW(DW), .CW(CW), .N(N), .MUL_J(MUL_J), .ADD_J(ADD_J)
  ) u_dp (
    .x(win), .c(w), .y(y)
  );

endmodule
