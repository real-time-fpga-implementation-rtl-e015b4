// add_layer: element-wise addition of two shift-layer outputs.
//
// With NSHIFT shift layers a convolution needs NSHIFT-1 of these; lane i of
// the result is a[i] + b[i], i.e. the weight x*(2^p1 + 2^p2) of one window
// element before its sign is applied. Purely combinational.
module add_layer
  import dvs_pkg::*;
#(
  parameter int unsigned LANES = 9
) (
  input  acc_t a [LANES],
  input  acc_t b [LANES],
  output acc_t y [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) y[i] = a[i] + b[i];
  end
endmodule
