// tb_emb_top_ctrl: drives random bags of remapped addresses into the EMB
// top controller, with three simple tier models (each busy for a random
// time after accepting a lookup) and a post-pooling model (busy for a
// random time after start). Checks that every lookup reaches exactly the
// tier its device code names with the right row index, that a lookup is
// only accepted while its tier is ready, that post-pooling starts only
// after the bag's last lookup with all tiers idle, that the pools are
// cleared once per bag, and the statistics counters including stalls.
module tb_emb_top_ctrl;
  import screc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid = 0, lk_ready, lk_last = 0;
  remap_addr_t lk_addr;
  logic [29:0] idx;
  logic dram_cmd_valid, dram_cmd_ready, dram_busy, ssd_cmd_valid, ssd_cmd_ready, ssd_busy;
  logic tt_req_valid, tt_req_ready, tt_busy, pool_clr, post_start, post_busy, post_done, busy;
  logic [31:0] stat_dram, stat_tt, stat_ssd, stat_stall, stat_err, stat_bags;
  int checks = 0, failures = 0;
  emb_top_ctrl dut (.*);

  // tier models: ready when idle, busy for a random time after a command
  int tcnt [3] = '{0, 0, 0};
  int pcnt = 0, n_start = 0, n_clr = 0, n_acc [4] = '{0, 0, 0, 0}, n_stall = 0;
  int exp_idx;
  assign dram_cmd_ready = (tcnt[0] == 0);
  assign tt_req_ready   = (tcnt[1] == 0);
  assign ssd_cmd_ready  = (tcnt[2] == 0);
  assign dram_busy = (tcnt[0] != 0);
  assign tt_busy   = (tcnt[1] != 0);
  assign ssd_busy  = (tcnt[2] != 0);
  assign post_busy = (pcnt != 0);
  logic [2:0] v;
  assign v = {ssd_cmd_valid, tt_req_valid, dram_cmd_valid};

  always @(posedge clk) begin
    post_done <= (pcnt == 1);
    if (rst_n) begin
      if (lk_valid && !lk_ready && !busy) n_stall++;
      if (v != 0 && lk_addr.device_id != DEV_RSVD) begin
        checks++;
        if (v != (3'b1 << int'(lk_addr.device_id)) || idx != lk_addr.emb_idx) begin
          failures++; $display("FAIL dispatch %b for device %0d", v, lk_addr.device_id);
        end
      end
      if (lk_valid && lk_ready) begin
        n_acc[int'(lk_addr.device_id)]++;
        if (lk_addr.device_id != DEV_RSVD) begin
          checks++;
          if (tcnt[int'(lk_addr.device_id)] != 0) begin failures++; $display("FAIL accepted while tier busy"); end
        end
      end
      if (post_start) begin
        n_start++;
        checks++;
        if (tcnt[0] || tcnt[1] || tcnt[2]) begin failures++; $display("FAIL post-pooling started early"); end
      end
      if (pool_clr) n_clr++;
    end
    for (int t = 0; t < 3; t++) begin
      if (tcnt[t] > 0) tcnt[t] <= tcnt[t] - 1;
      if (v[t] && ((t == 0 && dram_cmd_ready) || (t == 1 && tt_req_ready) || (t == 2 && ssd_cmd_ready)))
        tcnt[t] <= $urandom_range(1, 30);
    end
    if (pcnt > 0) pcnt <= pcnt - 1;
    if (post_start) pcnt <= $urandom_range(2, 40);
  end

  initial begin
    int nbags = 40;
    lk_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < nbags; b++) begin
      int n;
      n = $urandom_range(1, 8);
      for (int q = 0; q < n; q++) begin
        @(negedge clk);
        lk_valid = 1;
        lk_addr.device_id = dev_id_e'(($urandom_range(19) == 0) ? 3 : $urandom_range(2));
        lk_addr.emb_idx = 30'($urandom);
        lk_last = (q == n - 1);
        @(posedge clk); while (!lk_ready) @(posedge clk);
        @(negedge clk);
        lk_valid = 0; lk_last = 0;
      end
    end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks += 3;
    if (stat_dram != 32'(n_acc[0]) || stat_tt != 32'(n_acc[1]) || stat_ssd != 32'(n_acc[2]) || stat_err != 32'(n_acc[3])) begin
      failures++; $display("FAIL tier counters");
    end
    if (stat_bags != 32'(nbags) || n_start != nbags || n_clr != nbags) begin
      failures++; $display("FAIL bags %0d starts %0d clears %0d", stat_bags, n_start, n_clr);
    end
    if (stat_stall != 32'(n_stall) || n_stall == 0) begin
      failures++; $display("FAIL stalls %0d expected %0d", stat_stall, n_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
