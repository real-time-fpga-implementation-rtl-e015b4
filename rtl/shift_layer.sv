// shift_layer: element-wise shift of a window of activations.
//
// Every lane multiplies its activation by 2^p with a barrel shift: left for
// p > 0, right (arithmetic) for p < 0, unchanged for p = 0, and zero for the
// reserved "no term" code. This replaces the multipliers of a convolution;
// one shift layer handles one of the NSHIFT power-of-two terms of every
// weight in the window (the paper's Shift layer). Results carry FRAC
// fractional bits (see dvs_pkg). Purely combinational.
module shift_layer
  import dvs_pkg::*;
#(
  parameter int unsigned LANES = 9
) (
  input  act_t   x [LANES],
  input  shift_t p [LANES],
  output acc_t   y [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) y[i] = shift_term(x[i], p[i]);
  end
endmodule
