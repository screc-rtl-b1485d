// vpu_pool: one per-device pooling lane group of the vector pooling unit
// (the DRAM, SSD and TT pools of the EMB core). It sums every embedding
// vector that its memory device delivers for the current bag into an
// on-chip accumulator of DIM fp32 values. Vectors arrive as beats of up to
// W values: value l of a beat belongs to element in_base + l and is added
// when in_mask[l] is set; in_last marks the final beat of a vector and
// increments `count`, the number of vectors pooled. One beat is absorbed
// per cycle (W fp32 adders). `clr` empties the pool (acc = 0, count = 0)
// for the next bag. Summation per device follows the published design;
// the beat format is this design's choice.
module vpu_pool
  import screc_pkg::*;
#(
  parameter int unsigned W   = 16,
  parameter int unsigned DIM = 512,
  parameter int unsigned IW  = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          in_valid,
  input  logic [IW-1:0] in_base,
  input  fp32_t         in_data [W],
  input  logic          in_mask [W],
  input  logic          in_last,
  output fp32_t         acc [DIM],
  output logic [15:0]   count
);
  fp32_t sum [W];
  fp32_t cur [W];

  for (genvar l = 0; l < W; l++) begin : g_add
    logic [IW:0] idx;
    assign idx    = {1'b0, in_base} + (IW+1)'(l);
    assign cur[l] = (idx < DIM) ? acc[idx[$clog2(DIM)-1:0]] : FP32_ZERO;
    fp32_add u_add (.a(cur[l]), .b(in_data[l]), .y(sum[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < DIM; e++) acc[e] <= FP32_ZERO;
      count <= '0;
    end else if (clr) begin
      for (int e = 0; e < DIM; e++) acc[e] <= FP32_ZERO;
      count <= '0;
    end else if (in_valid) begin
      for (int l = 0; l < W; l++) begin
        logic [IW:0] idx;
        idx = {1'b0, in_base} + (IW+1)'(l);
        if (in_mask[l] && idx < DIM) acc[idx[$clog2(DIM)-1:0]] <= sum[l];
      end
      if (in_last) count <= count + 16'd1;
    end
  end
endmodule
