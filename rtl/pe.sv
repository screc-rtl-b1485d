// pe: one processing element of an output-stationary systolic array, as
// used in both the TT computation unit and the MLP computation units.
// Each cycle with a_vld set it multiplies the operand arriving from the
// left (a_in) by the operand arriving from above (b_in) in fp32 and adds
// the product to its local partial sum `acc`; the operands are registered
// and forwarded to the right (a_out, a_vld_out) and downward (b_out)
// neighbours. `clr` zeroes the partial sum at the start of an output tile
// (it takes precedence; a product presented in the same cycle is dropped).
// Multiplier and accumulator are combinational and share one cycle
// (the published design pipelines vendor FP IP; that pipelining is not
// reproduced here).
module pe
  import screc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  a_vld,
  input  fp32_t a_in,
  input  fp32_t b_in,
  output logic  a_vld_out,
  output fp32_t a_out,
  output fp32_t b_out,
  output fp32_t acc
);
  fp32_t prod, sum;

  fp32_mul u_mul (.a(a_in), .b(b_in), .y(prod));
  fp32_add u_add (.a(acc),  .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= FP32_ZERO;
      a_out     <= FP32_ZERO;
      b_out     <= FP32_ZERO;
      a_vld_out <= 1'b0;
    end else begin
      a_out     <= a_in;
      b_out     <= b_in;
      a_vld_out <= a_vld & ~clr;
      if (clr)        acc <= FP32_ZERO;
      else if (a_vld) acc <= sum;
    end
  end
endmodule
