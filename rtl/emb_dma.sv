// emb_dma: DMA engine of the EMB core. It has four independent parts:
//  - a DRAM read channel and an SSD read channel (emb_rd_chan): fetch
//    embedding rows of the DRAM and SSD tiers and stream them into the
//    matching pools of the vector pooling unit; the SSD port stands for the
//    peer-to-peer path through the SmartSSD's PCIe switch;
//  - a TT-core loader: a burst command (target TT_AMem or TT_CMem, first
//    word address, word count) followed by that many data words, written
//    to consecutive addresses of the TT computation unit memories
//    (initialisation, when the parameter mapper places TT-cores);
//  - a result writer: takes the pooled vectors from post-pooling and
//    writes each beat to host-visible memory at
//    cfg_out_base + bag * ceil(dim/16) * 64 + index * 4, counting bags.
// All ports use valid/ready handshakes except the memory read responses
// (always accepted). The block is named in the published EMB core; its
// internals are this design's.
module emb_dma
  import screc_pkg::*;
#(
  parameter int unsigned BEAT_W = 16,
  parameter int unsigned TT_W   = 32,
  parameter int unsigned IW     = 16,
  parameter int unsigned CAW    = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [IW-1:0]  cfg_dim,
  input  logic [63:0]    cfg_dram_base,
  input  logic [63:0]    cfg_ssd_base,
  input  logic [63:0]    cfg_out_base,
  // row fetch commands from the top controller
  input  logic           dram_cmd_valid,
  output logic           dram_cmd_ready,
  input  logic           ssd_cmd_valid,
  output logic           ssd_cmd_ready,
  input  logic [29:0]    cmd_idx,
  output logic           dram_busy,
  output logic           ssd_busy,
  // FPGA DRAM read port
  output logic           dram_req_valid,
  input  logic           dram_req_ready,
  output logic [63:0]    dram_req_addr,
  output logic [7:0]     dram_req_beats,
  input  logic           dram_rsp_valid,
  input  fp32_t          dram_rsp_data [BEAT_W],
  // SSD (P2P) read port
  output logic           ssd_req_valid,
  input  logic           ssd_req_ready,
  output logic [63:0]    ssd_req_addr,
  output logic [7:0]     ssd_req_beats,
  input  logic           ssd_rsp_valid,
  input  fp32_t          ssd_rsp_data [BEAT_W],
  // beats to the VPU
  output logic           vd_valid,
  output logic [IW-1:0]  vd_base,
  output fp32_t          vd_data [BEAT_W],
  output logic           vd_mask [BEAT_W],
  output logic           vd_last,
  output logic           vs_valid,
  output logic [IW-1:0]  vs_base,
  output fp32_t          vs_data [BEAT_W],
  output logic           vs_mask [BEAT_W],
  output logic           vs_last,
  // TT-core load from the host
  input  logic           ld_cmd_valid,
  output logic           ld_cmd_ready,
  input  tt_load_e       ld_cmd_sel,
  input  logic [CAW-1:0] ld_cmd_addr,
  input  logic [CAW:0]   ld_cmd_len,
  input  logic           ld_dvalid,
  output logic           ld_dready,
  input  fp32_t          ld_data [TT_W],
  output logic           tt_ld_we,
  output tt_load_e       tt_ld_sel,
  output logic [CAW-1:0] tt_ld_addr,
  output fp32_t          tt_ld_data [TT_W],
  // pooled vectors from post-pooling
  input  logic           pp_valid,
  output logic           pp_ready,
  input  logic [IW-1:0]  pp_idx,
  input  fp32_t          pp_data [BEAT_W],
  input  logic           pp_last,
  // result write port
  output logic           wr_valid,
  input  logic           wr_ready,
  output logic [63:0]    wr_addr,
  output fp32_t          wr_data [BEAT_W],
  output logic           wr_last,
  output logic [31:0]    bag_count
);
  emb_rd_chan #(.BEAT_W(BEAT_W), .IW(IW)) u_dram (
    .clk, .rst_n, .cfg_base(cfg_dram_base), .cfg_dim,
    .cmd_valid(dram_cmd_valid), .cmd_ready(dram_cmd_ready), .cmd_idx, .busy(dram_busy),
    .mem_req_valid(dram_req_valid), .mem_req_ready(dram_req_ready),
    .mem_req_addr(dram_req_addr), .mem_req_beats(dram_req_beats),
    .mem_rsp_valid(dram_rsp_valid), .mem_rsp_data(dram_rsp_data),
    .out_valid(vd_valid), .out_base(vd_base), .out_data(vd_data), .out_mask(vd_mask), .out_last(vd_last));

  emb_rd_chan #(.BEAT_W(BEAT_W), .IW(IW)) u_ssd (
    .clk, .rst_n, .cfg_base(cfg_ssd_base), .cfg_dim,
    .cmd_valid(ssd_cmd_valid), .cmd_ready(ssd_cmd_ready), .cmd_idx, .busy(ssd_busy),
    .mem_req_valid(ssd_req_valid), .mem_req_ready(ssd_req_ready),
    .mem_req_addr(ssd_req_addr), .mem_req_beats(ssd_req_beats),
    .mem_rsp_valid(ssd_rsp_valid), .mem_rsp_data(ssd_rsp_data),
    .out_valid(vs_valid), .out_base(vs_base), .out_data(vs_data), .out_mask(vs_mask), .out_last(vs_last));

  // TT-core loader
  logic [CAW:0]   ld_left;
  logic [CAW-1:0] ld_ptr;
  tt_load_e       ld_sel_q;
  assign ld_cmd_ready = (ld_left == 0);
  assign ld_dready    = (ld_left != 0);
  assign tt_ld_we     = ld_dvalid && ld_dready;
  assign tt_ld_sel    = ld_sel_q;
  assign tt_ld_addr   = ld_ptr;
  assign tt_ld_data   = ld_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_left <= '0; ld_ptr <= '0; ld_sel_q <= TT_LOAD_A;
    end else if (ld_cmd_valid && ld_cmd_ready) begin
      ld_left <= ld_cmd_len; ld_ptr <= ld_cmd_addr; ld_sel_q <= ld_cmd_sel;
    end else if (tt_ld_we) begin
      ld_left <= ld_left - 1'b1;
      ld_ptr  <= ld_ptr + 1'b1;
    end
  end

  // result writer
  logic [IW-1:0] beats;
  assign beats    = (cfg_dim + IW'(BEAT_W - 1)) / IW'(BEAT_W);
  assign wr_valid = pp_valid;
  assign pp_ready = wr_ready;
  assign wr_addr  = cfg_out_base + 64'(bag_count) * 64'(beats) * 64'(BEAT_W * 4) + 64'(pp_idx) * 64'd4;
  assign wr_data  = pp_data;
  assign wr_last  = pp_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bag_count <= '0;
    else if (pp_valid && wr_ready && pp_last) bag_count <= bag_count + 32'd1;
  end
endmodule
