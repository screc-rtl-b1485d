// emb_core: the EMB core mapped onto a SmartSSD FPGA that is assigned to
// the embedding layer. For each bag of lookups (remapped addresses from the
// host) it fetches hot rows from FPGA DRAM, rebuilds TT-compressed rows
// held in on-chip memory with the TT computation unit, fetches cold rows
// from the SSD over the peer-to-peer path, pools each tier separately in
// the vector pooling unit and writes the averaged (or summed) pooled
// vector out through the DMA. Block structure (DMA, top controller, vector
// pooling unit with DRAM/SSD/TT pools and post-pooling, TT computation unit
// with array controller, TT_AMem/TT_BMem/TT_CMem, 16x32 PE array and
// reshaper) follows the published EMB core.
// Ports: lookup stream (lk_*), configuration (cfg_*), TT-core load
// (ld_*), the FPGA DRAM and SSD read ports (external devices), the result
// write port (wr_*) and statistics. DIM (512) is the largest embedding
// dimension evaluated; the table's own dimension is cfg_dim and must equal
// cfg_j[0]*cfg_j[1]*cfg_j[2] for TT rows.
module emb_core
  import screc_pkg::*;
#(
  parameter int unsigned ROWS       = 16,
  parameter int unsigned COLS       = 32,
  parameter int unsigned RANK       = 4,
  parameter int unsigned TT_DIM     = 3,
  parameter int unsigned DIM        = 512,
  parameter int unsigned BEAT_W     = 16,
  parameter int unsigned AMEM_DEPTH = 2048,
  parameter int unsigned CMEM_DEPTH = 36864,
  parameter int unsigned BMEM_DEPTH = 2048,
  localparam int unsigned IW  = 16,
  localparam int unsigned CAW = $clog2(CMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration
  input  logic [IW-1:0]  cfg_dim,
  input  logic           cfg_avg,
  input  logic [63:0]    cfg_dram_base,
  input  logic [63:0]    cfg_ssd_base,
  input  logic [63:0]    cfg_out_base,
  input  logic [IW-1:0]  cfg_i     [TT_DIM],
  input  logic [IW-1:0]  cfg_j     [TT_DIM],
  input  logic [CAW-1:0] cfg_cbase [TT_DIM],
  // lookup stream
  input  logic           lk_valid,
  output logic           lk_ready,
  input  remap_addr_t    lk_addr,
  input  logic           lk_last,
  // TT-core load
  input  logic           ld_cmd_valid,
  output logic           ld_cmd_ready,
  input  tt_load_e       ld_cmd_sel,
  input  logic [CAW-1:0] ld_cmd_addr,
  input  logic [CAW:0]   ld_cmd_len,
  input  logic           ld_dvalid,
  output logic           ld_dready,
  input  fp32_t          ld_data [COLS],
  // FPGA DRAM read port
  output logic           dram_req_valid,
  input  logic           dram_req_ready,
  output logic [63:0]    dram_req_addr,
  output logic [7:0]     dram_req_beats,
  input  logic           dram_rsp_valid,
  input  fp32_t          dram_rsp_data [BEAT_W],
  // SSD read port
  output logic           ssd_req_valid,
  input  logic           ssd_req_ready,
  output logic [63:0]    ssd_req_addr,
  output logic [7:0]     ssd_req_beats,
  input  logic           ssd_rsp_valid,
  input  fp32_t          ssd_rsp_data [BEAT_W],
  // pooled vector write port
  output logic           wr_valid,
  input  logic           wr_ready,
  output logic [63:0]    wr_addr,
  output fp32_t          wr_data [BEAT_W],
  output logic           wr_last,
  // status
  output logic           busy,
  output logic [31:0]    stat_dram,
  output logic [31:0]    stat_tt,
  output logic [31:0]    stat_ssd,
  output logic [31:0]    stat_stall,
  output logic [31:0]    stat_err,
  output logic [31:0]    stat_bags
);
  logic [29:0]   idx;
  logic          dram_cmd_valid, dram_cmd_ready, dram_busy;
  logic          ssd_cmd_valid, ssd_cmd_ready, ssd_busy;
  logic          tt_req_valid, tt_req_ready, tt_busy;
  logic          pool_clr, post_start, post_busy, post_done, ctrl_busy;
  logic          tt_ld_we;
  tt_load_e      tt_ld_sel;
  logic [CAW-1:0] tt_ld_addr;
  fp32_t         tt_ld_data [COLS];
  logic          vd_valid, vs_valid, vt_valid, vd_last, vs_last, vt_last;
  logic [IW-1:0] vd_base, vs_base, vt_base;
  fp32_t         vd_data [BEAT_W];
  fp32_t         vs_data [BEAT_W];
  fp32_t         vt_data [COLS];
  logic          vd_mask [BEAT_W];
  logic          vs_mask [BEAT_W];
  logic          vt_mask [COLS];
  logic          pp_valid, pp_ready, pp_last;
  logic [IW-1:0] pp_idx;
  fp32_t         pp_data [BEAT_W];
  logic [15:0]   cnt_dram, cnt_ssd, cnt_tt;
  logic [31:0]   bag_count;

  emb_top_ctrl u_ctrl (
    .clk, .rst_n, .lk_valid, .lk_ready, .lk_addr, .lk_last, .idx,
    .dram_cmd_valid, .dram_cmd_ready, .dram_busy,
    .ssd_cmd_valid, .ssd_cmd_ready, .ssd_busy,
    .tt_req_valid, .tt_req_ready, .tt_busy,
    .pool_clr, .post_start, .post_busy, .post_done, .busy(ctrl_busy),
    .stat_dram, .stat_tt, .stat_ssd, .stat_stall, .stat_err, .stat_bags);

  emb_dma #(.BEAT_W(BEAT_W), .TT_W(COLS), .IW(IW), .CAW(CAW)) u_dma (
    .clk, .rst_n, .cfg_dim, .cfg_dram_base, .cfg_ssd_base, .cfg_out_base,
    .dram_cmd_valid, .dram_cmd_ready, .ssd_cmd_valid, .ssd_cmd_ready, .cmd_idx(idx),
    .dram_busy, .ssd_busy,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_req_beats, .dram_rsp_valid, .dram_rsp_data,
    .ssd_req_valid, .ssd_req_ready, .ssd_req_addr, .ssd_req_beats, .ssd_rsp_valid, .ssd_rsp_data,
    .vd_valid, .vd_base, .vd_data, .vd_mask, .vd_last,
    .vs_valid, .vs_base, .vs_data, .vs_mask, .vs_last,
    .ld_cmd_valid, .ld_cmd_ready, .ld_cmd_sel, .ld_cmd_addr, .ld_cmd_len, .ld_dvalid, .ld_dready, .ld_data,
    .tt_ld_we, .tt_ld_sel, .tt_ld_addr, .tt_ld_data,
    .pp_valid, .pp_ready, .pp_idx, .pp_data, .pp_last,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_last, .bag_count);

  tt_cu #(.ROWS(ROWS), .COLS(COLS), .RANK(RANK), .TT_DIM(TT_DIM), .IW(IW),
          .AMEM_DEPTH(AMEM_DEPTH), .CMEM_DEPTH(CMEM_DEPTH), .BMEM_DEPTH(BMEM_DEPTH)) u_tt (
    .clk, .rst_n, .ld_we(tt_ld_we), .ld_sel(tt_ld_sel), .ld_addr(tt_ld_addr), .ld_data(tt_ld_data),
    .cfg_i, .cfg_j, .cfg_cbase,
    .req_valid(tt_req_valid), .req_ready(tt_req_ready), .req_row(idx), .busy(tt_busy),
    .out_valid(vt_valid), .out_ready(1'b1), .out_base(vt_base), .out_data(vt_data),
    .out_mask(vt_mask), .out_last(vt_last));

  vpu #(.BEAT_W(BEAT_W), .TT_W(COLS), .DIM(DIM), .IW(IW)) u_vpu (
    .clk, .rst_n, .clr(pool_clr),
    .dram_valid(vd_valid), .dram_base(vd_base), .dram_data(vd_data), .dram_mask(vd_mask), .dram_last(vd_last),
    .ssd_valid(vs_valid), .ssd_base(vs_base), .ssd_data(vs_data), .ssd_mask(vs_mask), .ssd_last(vs_last),
    .tt_valid(vt_valid), .tt_base(vt_base), .tt_data(vt_data), .tt_mask(vt_mask), .tt_last(vt_last),
    .start(post_start), .dim(cfg_dim), .avg(cfg_avg), .busy(post_busy), .done(post_done),
    .out_valid(pp_valid), .out_ready(pp_ready), .out_idx(pp_idx), .out_data(pp_data), .out_last(pp_last),
    .cnt_dram, .cnt_ssd, .cnt_tt);

  assign busy = ctrl_busy | tt_busy | dram_busy | ssd_busy;
endmodule
