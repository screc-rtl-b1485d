// vpu: vector pooling unit of the EMB core. Following the published
// structure, each memory tier has its own pool, so vectors read from FPGA
// DRAM, from the SSD and rebuilt by the TT computation unit are summed
// independently and concurrently; the post-pooling stage then merges the
// three partial pools and averages them. DRAM and SSD beats carry
// BEAT_W = 16 values (one 512-bit memory word), TT beats carry TT_W = 32
// values (one row of the TT PE array). `clr` empties all three pools for
// the next bag; `start` launches post-pooling of the current bag (see
// post_pool for the output beat timing).
module vpu
  import screc_pkg::*;
#(
  parameter int unsigned BEAT_W = 16,
  parameter int unsigned TT_W   = 32,
  parameter int unsigned DIM    = 512,
  parameter int unsigned IW     = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  // DRAM pool
  input  logic          dram_valid,
  input  logic [IW-1:0] dram_base,
  input  fp32_t         dram_data [BEAT_W],
  input  logic          dram_mask [BEAT_W],
  input  logic          dram_last,
  // SSD pool
  input  logic          ssd_valid,
  input  logic [IW-1:0] ssd_base,
  input  fp32_t         ssd_data [BEAT_W],
  input  logic          ssd_mask [BEAT_W],
  input  logic          ssd_last,
  // TT pool
  input  logic          tt_valid,
  input  logic [IW-1:0] tt_base,
  input  fp32_t         tt_data [TT_W],
  input  logic          tt_mask [TT_W],
  input  logic          tt_last,
  // post-pooling
  input  logic          start,
  input  logic [IW-1:0] dim,
  input  logic          avg,
  output logic          busy,
  output logic          done,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [IW-1:0] out_idx,
  output fp32_t         out_data [BEAT_W],
  output logic          out_last,
  output logic [15:0]   cnt_dram,
  output logic [15:0]   cnt_ssd,
  output logic [15:0]   cnt_tt
);
  fp32_t acc_dram [DIM];
  fp32_t acc_ssd  [DIM];
  fp32_t acc_tt   [DIM];

  vpu_pool #(.W(BEAT_W), .DIM(DIM), .IW(IW)) u_dram (
    .clk, .rst_n, .clr, .in_valid(dram_valid), .in_base(dram_base), .in_data(dram_data),
    .in_mask(dram_mask), .in_last(dram_last), .acc(acc_dram), .count(cnt_dram));
  vpu_pool #(.W(BEAT_W), .DIM(DIM), .IW(IW)) u_ssd (
    .clk, .rst_n, .clr, .in_valid(ssd_valid), .in_base(ssd_base), .in_data(ssd_data),
    .in_mask(ssd_mask), .in_last(ssd_last), .acc(acc_ssd), .count(cnt_ssd));
  vpu_pool #(.W(TT_W), .DIM(DIM), .IW(IW)) u_tt (
    .clk, .rst_n, .clr, .in_valid(tt_valid), .in_base(tt_base), .in_data(tt_data),
    .in_mask(tt_mask), .in_last(tt_last), .acc(acc_tt), .count(cnt_tt));

  post_pool #(.LANES(BEAT_W), .DIM(DIM), .IW(IW)) u_post (
    .clk, .rst_n, .start, .dim, .avg, .acc_dram, .acc_ssd, .acc_tt,
    .cnt_dram, .cnt_ssd, .cnt_tt, .busy, .done,
    .out_valid, .out_ready, .out_idx, .out_data, .out_last);
endmodule
