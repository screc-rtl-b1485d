// mlp_shared_mem: shared memory of the MLP core, holding IOMem (layer
// inputs and outputs), WMem (weights) and BMem (biases), as in the
// published MLP core. Word formats: IOMem words hold COLS = 16 fp32
// values (one feature of a 16-sample batch tile); WMem and BMem words hold
// ROWS = 8 values (one input feature of an 8-neuron weight tile, or the
// biases of an 8-neuron tile). Each memory has NCU read ports so that the
// interconnect can serve four computation units in one cycle (read data
// one cycle after the enable), IOMem has a result write port, and the DMA
// has one write port into any memory and one read port on IOMem.
// Depths are this design's reading of the FPGA resources the published
// core uses (about 4.5 MiB URAM for weights, the rest in BRAM):
// WMem 147456 x 32 B = 4.5 MiB, IOMem 32768 x 64 B = 2 MiB,
// BMem 4096 x 32 B = 128 KiB.
module mlp_shared_mem
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
  input  logic            clk,
  // per-port reads
  input  logic            io_re    [NCU],
  input  logic [IOAW-1:0] io_raddr [NCU],
  output fp32_t           io_rdata [NCU][COLS],
  input  logic            w_re     [NCU],
  input  logic [WAW-1:0]  w_raddr  [NCU],
  output fp32_t           w_rdata  [NCU][ROWS],
  input  logic            b_re     [NCU],
  input  logic [BAW-1:0]  b_raddr  [NCU],
  output fp32_t           b_rdata  [NCU][ROWS],
  // result write into IOMem
  input  logic            io_we,
  input  logic [IOAW-1:0] io_waddr,
  input  fp32_t           io_wdata [COLS],
  // DMA
  input  logic            dma_we,
  input  mlp_mem_e        dma_sel,
  input  logic [19:0]     dma_addr,
  input  fp32_t           dma_wdata [COLS],
  input  logic            dma_re,
  output fp32_t           dma_rdata [COLS]
);
  fp32_t iomem [IO_DEPTH][COLS];
  fp32_t wmem  [W_DEPTH][ROWS];
  fp32_t bmem  [B_DEPTH][ROWS];
  fp32_t dma_w8 [ROWS];

  always_comb for (int l = 0; l < ROWS; l++) dma_w8[l] = dma_wdata[l];

  always_ff @(posedge clk) begin
    for (int u = 0; u < NCU; u++) begin
      if (io_re[u]) io_rdata[u] <= iomem[io_raddr[u]];
      if (w_re[u])  w_rdata[u]  <= wmem[w_raddr[u]];
      if (b_re[u])  b_rdata[u]  <= bmem[b_raddr[u]];
    end
    if (io_we) iomem[io_waddr] <= io_wdata;
    if (dma_we) begin
      unique case (dma_sel)
        MEM_IO:  iomem[dma_addr[IOAW-1:0]] <= dma_wdata;
        MEM_W:   wmem[dma_addr[WAW-1:0]]   <= dma_w8;
        MEM_B:   bmem[dma_addr[BAW-1:0]]   <= dma_w8;
        default: ;
      endcase
    end
    if (dma_re) dma_rdata <= iomem[dma_addr[IOAW-1:0]];
  end
endmodule
