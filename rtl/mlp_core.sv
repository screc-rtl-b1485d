// mlp_core: the MLP core mapped onto a SmartSSD FPGA that is assigned to
// the MLP layers (bottom and top MLP of the recommendation model). Four
// computation units, each an 8 x 16 fp32 PE array with bias adder and
// ReLU, share IOMem/WMem/BMem through an interconnect that either
// broadcasts inputs and splits weights (latency-optimised) or splits
// inputs and broadcasts weights (throughput-optimised), as in the
// published MLP core. A top controller runs one layer descriptor at a
// time; the host moves parameters, inputs and results with the DMA.
// Ports: DMA burst commands and data (dma_*), layer descriptors
// (layer_*), status.
module mlp_core
  import screc_pkg::*;
#(
  parameter int unsigned NCU      = 4,
  parameter int unsigned ROWS     = 8,
  parameter int unsigned COLS     = 16,
  parameter int unsigned IO_DEPTH = 32768,
  parameter int unsigned W_DEPTH  = 147456,
  parameter int unsigned B_DEPTH  = 4096,
  localparam int unsigned IOAW = $clog2(IO_DEPTH),
  localparam int unsigned WAW  = $clog2(W_DEPTH),
  localparam int unsigned BAW  = $clog2(B_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // DMA
  input  logic        dma_cmd_valid,
  output logic        dma_cmd_ready,
  input  logic        dma_cmd_write,
  input  mlp_mem_e    dma_cmd_sel,
  input  logic [19:0] dma_cmd_addr,
  input  logic [19:0] dma_cmd_len,
  input  logic        dma_in_valid,
  output logic        dma_in_ready,
  input  fp32_t       dma_in_data [COLS],
  output logic        dma_out_valid,
  input  logic        dma_out_ready,
  output fp32_t       dma_out_data [COLS],
  // layers
  input  logic        layer_valid,
  output logic        layer_ready,
  input  mlp_layer_t  layer,
  output logic        layer_done,
  output logic        busy,
  output mlp_mode_e   mode,
  output logic [31:0] stat_rounds
);
  logic            set_mode;
  mlp_mode_e       mode_req;
  logic            cu_start [NCU];
  logic [15:0]     cu_k_dim;
  logic [IOAW-1:0] cu_x_addr [NCU];
  logic [WAW-1:0]  cu_w_addr [NCU];
  logic [BAW-1:0]  cu_b_addr [NCU];
  logic [IOAW-1:0] cu_y_addr [NCU];
  logic [3:0]      cu_rows   [NCU];
  logic            cu_relu;
  logic            cu_busy   [NCU];
  logic            cu_done   [NCU];

  logic            cu_io_re    [NCU];
  logic [IOAW-1:0] cu_io_raddr [NCU];
  fp32_t           cu_io_rdata [NCU][COLS];
  logic            cu_w_re     [NCU];
  logic [WAW-1:0]  cu_w_raddr  [NCU];
  fp32_t           cu_w_rdata  [NCU][ROWS];
  logic            cu_b_re     [NCU];
  logic [BAW-1:0]  cu_b_raddr  [NCU];
  fp32_t           cu_b_rdata  [NCU][ROWS];
  logic            cu_wr_valid [NCU];
  logic            cu_wr_ready [NCU];
  logic [IOAW-1:0] cu_wr_addr  [NCU];
  fp32_t           cu_wr_data  [NCU][COLS];

  logic            io_re    [NCU];
  logic [IOAW-1:0] io_raddr [NCU];
  fp32_t           io_rdata [NCU][COLS];
  logic            w_re     [NCU];
  logic [WAW-1:0]  w_raddr  [NCU];
  fp32_t           w_rdata  [NCU][ROWS];
  logic            io_we;
  logic [IOAW-1:0] io_waddr;
  fp32_t           io_wdata [COLS];

  logic            mem_we, mem_re;
  mlp_mem_e        mem_sel;
  logic [19:0]     mem_addr;
  fp32_t           mem_wdata [COLS];
  fp32_t           mem_rdata [COLS];
  logic            ctrl_busy;

  mlp_top_ctrl #(.NCU(NCU), .ROWS(ROWS), .COLS(COLS), .IOAW(IOAW), .WAW(WAW), .BAW(BAW)) u_ctrl (
    .clk, .rst_n, .layer_valid, .layer_ready, .layer, .layer_done, .busy(ctrl_busy),
    .set_mode, .mode(mode_req),
    .cu_start, .cu_k_dim, .cu_x_addr, .cu_w_addr, .cu_b_addr, .cu_y_addr, .cu_rows, .cu_relu,
    .cu_busy, .stat_rounds);

  mlp_interconnect #(.NCU(NCU), .ROWS(ROWS), .COLS(COLS), .IOAW(IOAW), .WAW(WAW)) u_xbar (
    .clk, .rst_n, .set_mode, .mode_in(mode_req), .mode,
    .cu_io_re, .cu_io_raddr, .cu_io_rdata, .cu_w_re, .cu_w_raddr, .cu_w_rdata,
    .cu_wr_valid, .cu_wr_ready, .cu_wr_addr, .cu_wr_data,
    .io_re, .io_raddr, .io_rdata, .w_re, .w_raddr, .w_rdata,
    .io_we, .io_waddr, .io_wdata);

  for (genvar u = 0; u < NCU; u++) begin : g_cu
    mlp_cu #(.ROWS(ROWS), .COLS(COLS), .IOAW(IOAW), .WAW(WAW), .BAW(BAW)) u_cu (
      .clk, .rst_n, .start(cu_start[u]), .k_dim(cu_k_dim),
      .x_addr(cu_x_addr[u]), .w_addr(cu_w_addr[u]), .b_addr(cu_b_addr[u]), .y_addr(cu_y_addr[u]),
      .rows(cu_rows[u]), .relu(cu_relu), .busy(cu_busy[u]), .done(cu_done[u]),
      .io_re(cu_io_re[u]), .io_raddr(cu_io_raddr[u]), .io_rdata(cu_io_rdata[u]),
      .w_re(cu_w_re[u]), .w_raddr(cu_w_raddr[u]), .w_rdata(cu_w_rdata[u]),
      .b_re(cu_b_re[u]), .b_raddr(cu_b_raddr[u]), .b_rdata(cu_b_rdata[u]),
      .wr_valid(cu_wr_valid[u]), .wr_ready(cu_wr_ready[u]), .wr_addr(cu_wr_addr[u]),
      .wr_data(cu_wr_data[u]));
  end

  mlp_shared_mem #(.NCU(NCU), .ROWS(ROWS), .COLS(COLS), .IO_DEPTH(IO_DEPTH),
                   .W_DEPTH(W_DEPTH), .B_DEPTH(B_DEPTH)) u_mem (
    .clk, .io_re, .io_raddr, .io_rdata, .w_re, .w_raddr, .w_rdata,
    .b_re(cu_b_re), .b_raddr(cu_b_raddr), .b_rdata(cu_b_rdata),
    .io_we, .io_waddr, .io_wdata,
    .dma_we(mem_we), .dma_sel(mem_sel), .dma_addr(mem_addr), .dma_wdata(mem_wdata),
    .dma_re(mem_re), .dma_rdata(mem_rdata));

  mlp_dma #(.COLS(COLS)) u_dma (
    .clk, .rst_n, .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd_write(dma_cmd_write),
    .cmd_sel(dma_cmd_sel), .cmd_addr(dma_cmd_addr), .cmd_len(dma_cmd_len),
    .in_valid(dma_in_valid), .in_ready(dma_in_ready), .in_data(dma_in_data),
    .out_valid(dma_out_valid), .out_ready(dma_out_ready), .out_data(dma_out_data),
    .mem_we, .mem_sel, .mem_addr, .mem_wdata, .mem_re, .mem_rdata);

  assign busy = ctrl_busy;
endmodule
