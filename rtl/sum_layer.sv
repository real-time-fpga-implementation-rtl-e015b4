// sum_layer: signed global sum of a window (the paper's Sum / global add layer).
//
// sum = sum_i (s[i] ? -v[i] : v[i]). The sign bits are the weight signs, so
// this stage applies s in {-1, 1} of every weight and adds all the products
// of the window. Purely combinational.
module sum_layer
  import dvs_pkg::*;
#(
  parameter int unsigned LANES = 9
) (
  input  acc_t v [LANES],
  input  logic s [LANES],
  output acc_t sum
);
  always_comb begin
    sum = '0;
    for (int i = 0; i < LANES; i++) sum += s[i] ? -v[i] : v[i];
  end
endmodule
