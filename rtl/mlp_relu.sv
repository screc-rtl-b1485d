// mlp_relu: activation-function unit of an MLP computation unit: the
// rectified linear unit of the published design, max(x, 0) on N fp32
// values, applied when `en` is set (a layer without activation, such as
// the last top-MLP layer, passes values unchanged; the enable is this
// design's choice). Negative values and -0 become +0; combinational.
module mlp_relu
  import screc_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic  en,
  input  fp32_t x [N],
  output fp32_t y [N]
);
  always_comb
    for (int l = 0; l < N; l++) y[l] = (en && x[l][31]) ? FP32_ZERO : x[l];
endmodule
