// screc_top: the accelerator side of a SCRec cluster, a single server with
// N_EMB + N_MLP SmartSSDs. Each SmartSSD's FPGA is programmed either with an
// EMB core (embedding layer: three-level sharded tables in FPGA DRAM,
// on-chip TT-format and SSD) or with an MLP core (bottom and top MLP).
// The split between the two kinds is decided offline from the workload by
// the resource manager; the default 5 EMB + 3 MLP is the allocation shown
// for the smallest evaluated model on 8 SmartSSDs. The cores do not talk
// to each other directly: the host moves pooled embeddings to the MLP
// devices (all-to-all) and issues lookups and layers, so every core's
// host-side ports, and each EMB core's FPGA DRAM and SSD read ports (the
// memory chips and the SSD sit outside the FPGA, behind the SmartSSD's
// PCIe switch), are brought out as arrays indexed by device.
module screc_top
  import screc_pkg::*;
#(
  parameter int unsigned N_EMB      = 5,
  parameter int unsigned N_MLP      = 3,
  parameter int unsigned EMB_DIM    = 512,
  parameter int unsigned TT_ROWS    = 16,
  parameter int unsigned TT_COLS    = 32,
  parameter int unsigned TT_RANK    = 4,
  parameter int unsigned TT_DIM     = 3,
  parameter int unsigned AMEM_DEPTH = 2048,
  parameter int unsigned CMEM_DEPTH = 36864,
  parameter int unsigned BMEM_DEPTH = 2048,
  parameter int unsigned NCU        = 4,
  parameter int unsigned MLP_ROWS   = 8,
  parameter int unsigned MLP_COLS   = 16,
  parameter int unsigned IO_DEPTH   = 32768,
  parameter int unsigned W_DEPTH    = 147456,
  parameter int unsigned B_DEPTH    = 4096,
  localparam int unsigned BEAT_W = 16,
  localparam int unsigned CAW    = $clog2(CMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // ---------------- EMB SmartSSDs ----------------
  input  logic [15:0]    e_cfg_dim       [N_EMB],
  input  logic           e_cfg_avg       [N_EMB],
  input  logic [63:0]    e_cfg_dram_base [N_EMB],
  input  logic [63:0]    e_cfg_ssd_base  [N_EMB],
  input  logic [63:0]    e_cfg_out_base  [N_EMB],
  input  logic [15:0]    e_cfg_i         [N_EMB][TT_DIM],
  input  logic [15:0]    e_cfg_j         [N_EMB][TT_DIM],
  input  logic [CAW-1:0] e_cfg_cbase     [N_EMB][TT_DIM],
  input  logic           e_lk_valid      [N_EMB],
  output logic           e_lk_ready      [N_EMB],
  input  remap_addr_t    e_lk_addr       [N_EMB],
  input  logic           e_lk_last       [N_EMB],
  input  logic           e_ld_cmd_valid  [N_EMB],
  output logic           e_ld_cmd_ready  [N_EMB],
  input  tt_load_e       e_ld_cmd_sel    [N_EMB],
  input  logic [CAW-1:0] e_ld_cmd_addr   [N_EMB],
  input  logic [CAW:0]   e_ld_cmd_len    [N_EMB],
  input  logic           e_ld_dvalid     [N_EMB],
  output logic           e_ld_dready     [N_EMB],
  input  fp32_t          e_ld_data       [N_EMB][TT_COLS],
  output logic           e_dram_req_valid [N_EMB],
  input  logic           e_dram_req_ready [N_EMB],
  output logic [63:0]    e_dram_req_addr  [N_EMB],
  output logic [7:0]     e_dram_req_beats [N_EMB],
  input  logic           e_dram_rsp_valid [N_EMB],
  input  fp32_t          e_dram_rsp_data  [N_EMB][BEAT_W],
  output logic           e_ssd_req_valid  [N_EMB],
  input  logic           e_ssd_req_ready  [N_EMB],
  output logic [63:0]    e_ssd_req_addr   [N_EMB],
  output logic [7:0]     e_ssd_req_beats  [N_EMB],
  input  logic           e_ssd_rsp_valid  [N_EMB],
  input  fp32_t          e_ssd_rsp_data   [N_EMB][BEAT_W],
  output logic           e_wr_valid      [N_EMB],
  input  logic           e_wr_ready      [N_EMB],
  output logic [63:0]    e_wr_addr       [N_EMB],
  output fp32_t          e_wr_data       [N_EMB][BEAT_W],
  output logic           e_wr_last       [N_EMB],
  output logic           e_busy          [N_EMB],
  output logic [31:0]    e_stat_dram     [N_EMB],
  output logic [31:0]    e_stat_tt       [N_EMB],
  output logic [31:0]    e_stat_ssd      [N_EMB],
  output logic [31:0]    e_stat_stall    [N_EMB],
  output logic [31:0]    e_stat_err      [N_EMB],
  output logic [31:0]    e_stat_bags     [N_EMB],
  // ---------------- MLP SmartSSDs ----------------
  input  logic           m_dma_cmd_valid [N_MLP],
  output logic           m_dma_cmd_ready [N_MLP],
  input  logic           m_dma_cmd_write [N_MLP],
  input  mlp_mem_e       m_dma_cmd_sel   [N_MLP],
  input  logic [19:0]    m_dma_cmd_addr  [N_MLP],
  input  logic [19:0]    m_dma_cmd_len   [N_MLP],
  input  logic           m_dma_in_valid  [N_MLP],
  output logic           m_dma_in_ready  [N_MLP],
  input  fp32_t          m_dma_in_data   [N_MLP][MLP_COLS],
  output logic           m_dma_out_valid [N_MLP],
  input  logic           m_dma_out_ready [N_MLP],
  output fp32_t          m_dma_out_data  [N_MLP][MLP_COLS],
  input  logic           m_layer_valid   [N_MLP],
  output logic           m_layer_ready   [N_MLP],
  input  mlp_layer_t     m_layer         [N_MLP],
  output logic           m_layer_done    [N_MLP],
  output logic           m_busy          [N_MLP],
  output mlp_mode_e      m_mode          [N_MLP],
  output logic [31:0]    m_stat_rounds   [N_MLP]
);
  for (genvar d = 0; d < N_EMB; d++) begin : g_emb
    emb_core #(.ROWS(TT_ROWS), .COLS(TT_COLS), .RANK(TT_RANK), .TT_DIM(TT_DIM), .DIM(EMB_DIM),
               .BEAT_W(BEAT_W), .AMEM_DEPTH(AMEM_DEPTH), .CMEM_DEPTH(CMEM_DEPTH),
               .BMEM_DEPTH(BMEM_DEPTH)) u_emb (
      .clk, .rst_n,
      .cfg_dim(e_cfg_dim[d]), .cfg_avg(e_cfg_avg[d]), .cfg_dram_base(e_cfg_dram_base[d]),
      .cfg_ssd_base(e_cfg_ssd_base[d]), .cfg_out_base(e_cfg_out_base[d]),
      .cfg_i(e_cfg_i[d]), .cfg_j(e_cfg_j[d]), .cfg_cbase(e_cfg_cbase[d]),
      .lk_valid(e_lk_valid[d]), .lk_ready(e_lk_ready[d]), .lk_addr(e_lk_addr[d]), .lk_last(e_lk_last[d]),
      .ld_cmd_valid(e_ld_cmd_valid[d]), .ld_cmd_ready(e_ld_cmd_ready[d]), .ld_cmd_sel(e_ld_cmd_sel[d]),
      .ld_cmd_addr(e_ld_cmd_addr[d]), .ld_cmd_len(e_ld_cmd_len[d]),
      .ld_dvalid(e_ld_dvalid[d]), .ld_dready(e_ld_dready[d]), .ld_data(e_ld_data[d]),
      .dram_req_valid(e_dram_req_valid[d]), .dram_req_ready(e_dram_req_ready[d]),
      .dram_req_addr(e_dram_req_addr[d]), .dram_req_beats(e_dram_req_beats[d]),
      .dram_rsp_valid(e_dram_rsp_valid[d]), .dram_rsp_data(e_dram_rsp_data[d]),
      .ssd_req_valid(e_ssd_req_valid[d]), .ssd_req_ready(e_ssd_req_ready[d]),
      .ssd_req_addr(e_ssd_req_addr[d]), .ssd_req_beats(e_ssd_req_beats[d]),
      .ssd_rsp_valid(e_ssd_rsp_valid[d]), .ssd_rsp_data(e_ssd_rsp_data[d]),
      .wr_valid(e_wr_valid[d]), .wr_ready(e_wr_ready[d]), .wr_addr(e_wr_addr[d]),
      .wr_data(e_wr_data[d]), .wr_last(e_wr_last[d]),
      .busy(e_busy[d]), .stat_dram(e_stat_dram[d]), .stat_tt(e_stat_tt[d]), .stat_ssd(e_stat_ssd[d]),
      .stat_stall(e_stat_stall[d]), .stat_err(e_stat_err[d]), .stat_bags(e_stat_bags[d]));
  end

  for (genvar d = 0; d < N_MLP; d++) begin : g_mlp
    mlp_core #(.NCU(NCU), .ROWS(MLP_ROWS), .COLS(MLP_COLS), .IO_DEPTH(IO_DEPTH),
               .W_DEPTH(W_DEPTH), .B_DEPTH(B_DEPTH)) u_mlp (
      .clk, .rst_n,
      .dma_cmd_valid(m_dma_cmd_valid[d]), .dma_cmd_ready(m_dma_cmd_ready[d]),
      .dma_cmd_write(m_dma_cmd_write[d]), .dma_cmd_sel(m_dma_cmd_sel[d]),
      .dma_cmd_addr(m_dma_cmd_addr[d]), .dma_cmd_len(m_dma_cmd_len[d]),
      .dma_in_valid(m_dma_in_valid[d]), .dma_in_ready(m_dma_in_ready[d]), .dma_in_data(m_dma_in_data[d]),
      .dma_out_valid(m_dma_out_valid[d]), .dma_out_ready(m_dma_out_ready[d]), .dma_out_data(m_dma_out_data[d]),
      .layer_valid(m_layer_valid[d]), .layer_ready(m_layer_ready[d]), .layer(m_layer[d]),
      .layer_done(m_layer_done[d]), .busy(m_busy[d]), .mode(m_mode[d]), .stat_rounds(m_stat_rounds[d]));
  end
endmodule
