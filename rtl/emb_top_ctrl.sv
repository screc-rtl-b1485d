// emb_top_ctrl: top controller of the EMB core. It consumes the lookup
// stream of a bag: 32-bit remapped addresses {device_id[1:0],
// emb_idx[29:0]} produced by the host remapping table (device 0 = FPGA
// DRAM, 1 = BRAM in TT format, 2 = SSD, per the published address
// layout), and dispatches each one to the DRAM read channel, the TT
// computation unit or the SSD read channel. The three tiers work
// concurrently; a lookup whose tier is still busy stalls the stream
// (lk_ready low) and is counted in stat_stall. Device code 3 is dropped
// and counted in stat_err (this design's choice). After the lookup flagged
// lk_last is dispatched, the controller waits until all tiers are idle,
// starts post-pooling, and when it finishes clears the pools and accepts
// the next bag. Statistics count lookups per tier and bags completed.
module emb_top_ctrl
  import screc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // lookup stream
  input  logic        lk_valid,
  output logic        lk_ready,
  input  remap_addr_t lk_addr,
  input  logic        lk_last,
  // dispatch
  output logic [29:0] idx,
  output logic        dram_cmd_valid,
  input  logic        dram_cmd_ready,
  input  logic        dram_busy,
  output logic        ssd_cmd_valid,
  input  logic        ssd_cmd_ready,
  input  logic        ssd_busy,
  output logic        tt_req_valid,
  input  logic        tt_req_ready,
  input  logic        tt_busy,
  // VPU control
  output logic        pool_clr,
  output logic        post_start,
  input  logic        post_busy,
  input  logic        post_done,
  output logic        busy,
  // statistics
  output logic [31:0] stat_dram,
  output logic [31:0] stat_tt,
  output logic [31:0] stat_ssd,
  output logic [31:0] stat_stall,
  output logic [31:0] stat_err,
  output logic [31:0] stat_bags
);
  typedef enum logic [2:0] {S_RUN, S_DRAIN, S_SETTLE, S_POST, S_WAIT, S_CLR} state_e;
  state_e state;
  logic tgt_ready, accept;

  always_comb begin
    unique case (lk_addr.device_id)
      DEV_DRAM: tgt_ready = dram_cmd_ready;
      DEV_BRAM: tgt_ready = tt_req_ready;
      DEV_SSD:  tgt_ready = ssd_cmd_ready;
      default:  tgt_ready = 1'b1;
    endcase
  end

  assign idx            = lk_addr.emb_idx;
  assign lk_ready       = (state == S_RUN) && tgt_ready;
  assign accept         = lk_valid && lk_ready;
  assign dram_cmd_valid = (state == S_RUN) && lk_valid && lk_addr.device_id == DEV_DRAM;
  assign tt_req_valid   = (state == S_RUN) && lk_valid && lk_addr.device_id == DEV_BRAM;
  assign ssd_cmd_valid  = (state == S_RUN) && lk_valid && lk_addr.device_id == DEV_SSD;
  assign post_start     = (state == S_POST);
  assign pool_clr       = (state == S_CLR);
  assign busy           = (state != S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN;
      stat_dram <= '0; stat_tt <= '0; stat_ssd <= '0;
      stat_stall <= '0; stat_err <= '0; stat_bags <= '0;
    end else begin
      case (state)
        S_RUN: begin
          if (lk_valid && !tgt_ready) stat_stall <= stat_stall + 32'd1;
          if (accept) begin
            unique case (lk_addr.device_id)
              DEV_DRAM: stat_dram <= stat_dram + 32'd1;
              DEV_BRAM: stat_tt   <= stat_tt + 32'd1;
              DEV_SSD:  stat_ssd  <= stat_ssd + 32'd1;
              default:  stat_err  <= stat_err + 32'd1;
            endcase
            if (lk_last) state <= S_DRAIN;
          end
        end
        // the dispatched lookup becomes busy one cycle after acceptance
        S_DRAIN:  state <= S_SETTLE;
        S_SETTLE: if (!dram_busy && !ssd_busy && !tt_busy) state <= S_POST;
        S_POST:   state <= S_WAIT;
        S_WAIT:   if (post_done || !post_busy) state <= S_CLR;
        S_CLR: begin
          stat_bags <= stat_bags + 32'd1;
          state <= S_RUN;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // a lookup is only offered to the tier its device code names
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({dram_cmd_valid, tt_req_valid, ssd_cmd_valid}));
endmodule
