// tt_bmem: TT_BMem, the dual-channel scratch memory of the TT computation
// unit. It holds the intermediate product R_k of the TT-core chain in
// row-major order with RANK columns: element (row m, column k) lives at
// flat index m*RANK + k. Because reshaping a row-major matrix keeps its flat
// order, the reshaper stores each output tile row at consecutive flat
// indices and the array controller reads the result back as a RANK-column
// matrix, with no data movement for the reshape itself.
// Two banks form the two channels: step s of the chain reads one bank as
// operand A while the reshaper fills the other for step s+1.
// Write port: wr_en writes wr_data[l] to bank wr_bank, index wr_base + l,
// for every lane l with wr_mask[l] set (one tile row per cycle).
// Read port: rd_en returns, one cycle later, rdata[r] = element
// (rd_row + r, rd_k) of bank rd_bank for the RD_LANES array rows; indices
// past DEPTH read as zero. DEPTH is a choice of this design (intermediate
// products up to 2048 values, enough for a 512-wide vector with 3 cores).
module tt_bmem
  import screc_pkg::*;
#(
  parameter int unsigned DEPTH    = 2048,
  parameter int unsigned WR_LANES = 32,
  parameter int unsigned RD_LANES = 16,
  parameter int unsigned RANK     = 4,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic        wr_bank,
  input  logic [AW:0] wr_base,
  input  fp32_t       wr_data [WR_LANES],
  input  logic        wr_mask [WR_LANES],
  input  logic        rd_en,
  input  logic        rd_bank,
  input  logic [AW:0] rd_row,
  input  logic [$clog2(RANK)-1:0] rd_k,
  output fp32_t       rdata [RD_LANES]
);
  fp32_t mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < WR_LANES; l++) begin
        logic [AW+1:0] idx;
        idx = {1'b0, wr_base} + (AW+2)'(l);
        if (wr_mask[l] && idx < DEPTH) mem[wr_bank][idx[AW-1:0]] <= wr_data[l];
      end
    end
    if (rd_en) begin
      for (int r = 0; r < RD_LANES; r++) begin
        logic [AW+$clog2(RANK)+1:0] idx;
        idx = ({1'b0, rd_row} + (AW+$clog2(RANK)+2)'(r)) * (AW+$clog2(RANK)+2)'(RANK)
              + (AW+$clog2(RANK)+2)'(rd_k);
        rdata[r] <= (idx < DEPTH) ? mem[rd_bank][idx[AW-1:0]] : FP32_ZERO;
      end
    end
  end
endmodule
