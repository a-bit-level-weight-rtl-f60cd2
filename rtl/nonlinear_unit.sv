// nonlinear_unit -- activation function applied to one scaled output.
//
// Implements ReLU, y = max(x, 0), when `relu_en` is set; with `relu_en` low
// the value passes unchanged (layers without activation, e.g. the last
// classifier layer). Combinational. The published design only names a
// non-linear unit; the choice of ReLU is this design's.
module nonlinear_unit
  import rram_pkg::*;
(
  input  logic                     relu_en,
  input  logic signed [A_BITS-1:0] x,
  output logic signed [A_BITS-1:0] y
);

  always_comb y = (relu_en && x < 0) ? '0 : x;

endmodule
