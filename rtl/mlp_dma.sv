// mlp_dma: DMA engine of the MLP core. A burst command names a target
// memory (IOMem, WMem or BMem), a first word address and a word count, and
// a direction. Write bursts (host to core: parameters and layer inputs)
// take `len` data words from in_data (valid/ready) and store them at
// consecutive addresses; for WMem and BMem only the low 8 lanes are used.
// Read bursts (core to host: layer outputs) read `len` IOMem words and
// return them on out_data (valid/ready), one word every two cycles at most
// (read issue, then hold until accepted). The block is named in the
// published MLP core; its internals are this design's.
module mlp_dma
  import screc_pkg::*;
#(
  parameter int unsigned COLS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic        cmd_write,
  input  mlp_mem_e    cmd_sel,
  input  logic [19:0] cmd_addr,
  input  logic [19:0] cmd_len,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp32_t       in_data [COLS],
  output logic        out_valid,
  input  logic        out_ready,
  output fp32_t       out_data [COLS],
  // shared memory port
  output logic        mem_we,
  output mlp_mem_e    mem_sel,
  output logic [19:0] mem_addr,
  output fp32_t       mem_wdata [COLS],
  output logic        mem_re,
  input  fp32_t       mem_rdata [COLS]
);
  typedef enum logic [1:0] {S_IDLE, S_WR, S_RD_ISSUE, S_RD_HOLD} state_e;
  state_e state;
  logic [19:0] ptr, left;
  mlp_mem_e    sel_q;

  assign cmd_ready = (state == S_IDLE);
  assign in_ready  = (state == S_WR);
  assign mem_we    = (state == S_WR) && in_valid;
  assign mem_sel   = sel_q;
  assign mem_addr  = ptr;
  assign mem_wdata = in_data;
  assign mem_re    = (state == S_RD_ISSUE);
  assign out_valid = (state == S_RD_HOLD);
  assign out_data  = mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ptr <= '0; left <= '0; sel_q <= MEM_IO;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid && cmd_len != 0) begin
          ptr <= cmd_addr; left <= cmd_len; sel_q <= cmd_write ? cmd_sel : MEM_IO;
          state <= cmd_write ? S_WR : S_RD_ISSUE;
        end
        S_WR: if (in_valid) begin
          ptr <= ptr + 20'd1; left <= left - 20'd1;
          if (left == 20'd1) state <= S_IDLE;
        end
        S_RD_ISSUE: state <= S_RD_HOLD;
        S_RD_HOLD: if (out_ready) begin
          ptr <= ptr + 20'd1; left <= left - 20'd1;
          state <= (left == 20'd1) ? S_IDLE : S_RD_ISSUE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
