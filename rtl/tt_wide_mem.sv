// tt_wide_mem: on-chip TT-core memory (TT_AMem / TT_CMem of the TT
// computation unit). One word holds LANES fp32 values: the vector that
// enters one edge of the PE array in one cycle. TT_AMem (LANES = 16) holds
// the unfolded first TT-core, one word per (row index i1, rank index,
// 16-row block); TT_CMem (LANES = 32) holds the other TT-cores, one word per
// (core, index i_k, rank row, 32-column block). Words are written once at
// initialisation through the write port and read at run time.
// Timing: write on the rising edge when we = 1; read data appear on rdata
// one cycle after re = 1 and hold until the next read.
// Default depth 36864 words x 32 lanes = 4.5 MiB, the URAM capacity of the
// SmartSSD FPGA that the published TT memories fill completely; the split
// between AMem and CMem is a choice of this design.
module tt_wide_mem
  import screc_pkg::*;
#(
  parameter int unsigned DEPTH = 36864,
  parameter int unsigned LANES = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fp32_t         wdata [LANES],
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fp32_t         rdata [LANES]
);
  fp32_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
