// tb_emb_mem_model: behavioural model of an external memory read port of
// the EMB core (the SmartSSD's FPGA DRAM, or the SSD reached peer to peer).
// Not synthesizable design logic: it stands in for devices outside the
// FPGA. A request (valid/ready, byte address, word count) is accepted
// with random back-pressure; after a random latency of LAT_MIN..LAT_MAX
// cycles the model returns the words, one per cycle, each BEAT_W lanes of
// tb_fp_pkg::table_word(TIER, word address). Only one request is served
// at a time, which is all the read channels issue. It counts requests.
module tb_emb_mem_model
  import screc_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int TIER    = 0,
  parameter int BEAT_W  = 16,
  parameter int LAT_MIN = 2,
  parameter int LAT_MAX = 10
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [63:0] req_addr,
  input  logic [7:0]  req_beats,
  output logic        rsp_valid,
  output fp32_t       rsp_data [BEAT_W],
  output int          n_req
);
  logic [63:0] addr;
  int          beats, wait_cyc;
  logic        active;

  initial begin
    req_ready = 0; rsp_valid = 0; active = 0; n_req = 0;
    foreach (rsp_data[l]) rsp_data[l] = '0;
  end

  always @(posedge clk) begin
    rsp_valid <= 0;
    if (!active) begin
      if (req_valid && req_ready) begin
        active   <= 1;
        addr     <= req_addr;
        beats    <= int'(req_beats);
        wait_cyc <= int'($urandom_range(LAT_MAX - LAT_MIN)) + LAT_MIN;
        n_req    <= n_req + 1;
        req_ready <= 0;
      end else req_ready <= ($urandom_range(2) != 0);
    end else if (wait_cyc > 0) wait_cyc <= wait_cyc - 1;
    else if (beats > 0) begin
      rsp_valid <= 1;
      for (int l = 0; l < BEAT_W; l++) rsp_data[l] <= table_word(TIER, longint'(addr / 4) + l);
      addr  <= addr + 64'(BEAT_W * 4);
      beats <= beats - 1;
      if (beats == 1) active <= 0;
    end
  end
endmodule
