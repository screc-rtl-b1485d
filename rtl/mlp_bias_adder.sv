// mlp_bias_adder: bias adder of an MLP computation unit. It adds the bias
// of one output neuron to the N batch results of that neuron (one row of
// the PE array tile) with N fp32 adders, combinationally; the array
// controller walks the tile rows, one per cycle. Vector addition with the
// bias from BMem follows the published design.
module mlp_bias_adder
  import screc_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  fp32_t x [N],
  input  fp32_t bias,
  output fp32_t y [N]
);
  for (genvar l = 0; l < N; l++) begin : g_add
    fp32_add u_add (.a(x[l]), .b(bias), .y(y[l]));
  end
endmodule
