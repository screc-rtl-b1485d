// emb_rd_chan: one embedding-row read channel of the EMB DMA (used once
// for FPGA DRAM and once for the SSD). A command carries the row index
// emb_idx inside this tier's table region; the channel issues one read
// request of ceil(dim/BEAT_W) memory words at byte address
// cfg_base + emb_idx * ceil(dim/BEAT_W) * BEAT_W * 4 (rows padded to whole
// 512-bit words, a layout choice of this design), then forwards every
// returned word to its VPU pool as a beat: element index of lane 0,
// lane mask for the part past `dim`, and `last` on the final word.
// One request is outstanding at a time; cmd_ready is high only when idle
// and `busy` stays high until the last word has been forwarded. The
// memory port is a plain request (valid/ready) plus response (valid only,
// always accepted) pair.
module emb_rd_chan
  import screc_pkg::*;
#(
  parameter int unsigned BEAT_W = 16,
  parameter int unsigned IW     = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [63:0]   cfg_base,
  input  logic [IW-1:0] cfg_dim,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  logic [29:0]   cmd_idx,
  output logic          busy,
  // memory request / response
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic [63:0]   mem_req_addr,
  output logic [7:0]    mem_req_beats,
  input  logic          mem_rsp_valid,
  input  fp32_t         mem_rsp_data [BEAT_W],
  // beats to the VPU pool
  output logic          out_valid,
  output logic [IW-1:0] out_base,
  output fp32_t         out_data [BEAT_W],
  output logic          out_mask [BEAT_W],
  output logic          out_last
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RSP} state_e;
  state_e state;
  logic [IW-1:0] beats, beat;
  logic [29:0]   idx_q;

  assign beats         = (cfg_dim + IW'(BEAT_W - 1)) / IW'(BEAT_W);
  assign cmd_ready     = (state == S_IDLE);
  assign busy          = (state != S_IDLE);
  assign mem_req_valid = (state == S_REQ);
  assign mem_req_addr  = cfg_base + 64'(idx_q) * 64'(beats) * 64'(BEAT_W * 4);
  assign mem_req_beats = 8'(beats);
  assign out_valid     = (state == S_RSP) && mem_rsp_valid;
  assign out_base      = beat * IW'(BEAT_W);
  assign out_data      = mem_rsp_data;
  assign out_last      = (beat + 1'b1 == beats);
  always_comb
    for (int l = 0; l < BEAT_W; l++) out_mask[l] = (out_base + IW'(l)) < cfg_dim;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; beat <= '0; idx_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          idx_q <= cmd_idx;
          beat  <= '0;
          state <= S_REQ;
        end
        S_REQ: if (mem_req_ready) state <= S_RSP;
        S_RSP: if (mem_rsp_valid) begin
          beat <= beat + 1'b1;
          if (out_last) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
