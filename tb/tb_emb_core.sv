// tb_emb_core: end-to-end test of one EMB core at its default size. It
// loads TT-cores (3 cores, rank 4) through the DMA loader, connects
// behavioural FPGA DRAM and SSD models with random latency and
// back-pressure, streams random bags of remapped lookups over all three
// tiers (plus an occasional invalid device code) and checks every element
// of every pooled vector written out, its address, and the statistics
// counters. Table values are multiples of 1/8 and TT-core values multiples
// of 1/8 in [-1/2, 1/2], so every sum is exact and the reference does not
// depend on summation order; averages are checked against the correctly
// rounded quotient. Two tables: 64-wide (4x4x4) summed, and 24-wide
// (2x3x4, partial beats) averaged.
module tb_emb_core;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int COLS = 32, R = 4, K = 3, BW = 16, CAW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] cfg_dim = 64;
  logic cfg_avg = 0;
  logic [63:0] cfg_dram_base = 64'h1000, cfg_ssd_base = 64'h8000_0000, cfg_out_base = 64'h40_0000;
  logic [15:0] cfg_i [K], cfg_j [K];
  logic [CAW-1:0] cfg_cbase [K];
  logic lk_valid = 0, lk_ready, lk_last = 0;
  remap_addr_t lk_addr;
  logic ld_cmd_valid = 0, ld_cmd_ready, ld_dvalid = 0, ld_dready;
  tt_load_e ld_cmd_sel = TT_LOAD_A;
  logic [CAW-1:0] ld_cmd_addr = 0;
  logic [CAW:0] ld_cmd_len = 0;
  fp32_t ld_data [COLS];
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic ssd_req_valid, ssd_req_ready, ssd_rsp_valid;
  logic [63:0] dram_req_addr, ssd_req_addr, wr_addr;
  logic [7:0] dram_req_beats, ssd_req_beats;
  fp32_t dram_rsp_data [BW];
  fp32_t ssd_rsp_data [BW];
  fp32_t wr_data [BW];
  logic wr_valid, wr_ready = 1, wr_last, busy;
  logic [31:0] stat_dram, stat_tt, stat_ssd, stat_stall, stat_err, stat_bags;
  int n_dram_req, n_ssd_req;
  int checks = 0, failures = 0;

  emb_core dut (.*);

  tb_emb_mem_model #(.TIER(0), .LAT_MIN(2), .LAT_MAX(12)) u_dram (
    .clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_addr(dram_req_addr),
    .req_beats(dram_req_beats), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data), .n_req(n_dram_req));
  tb_emb_mem_model #(.TIER(2), .LAT_MIN(20), .LAT_MAX(60)) u_ssd (
    .clk, .req_valid(ssd_req_valid), .req_ready(ssd_req_ready), .req_addr(ssd_req_addr),
    .req_beats(ssd_req_beats), .rsp_valid(ssd_rsp_valid), .rsp_data(ssd_rsp_data), .n_req(n_ssd_req));

  // TT-cores: G1[i][j][r], G2[r][i][j][r'], G3[r][i][j]
  real G1 [8][8][R];
  real G2 [R][8][8][R];
  real G3 [R][8][8];
  fp32_t got [longint];
  int nlast = 0;

  always @(posedge clk) begin
    wr_ready <= ($urandom_range(4) != 0);
    if (wr_valid && wr_ready) begin
      for (int l = 0; l < BW; l++) got[longint'(wr_addr / 4) + l] = wr_data[l];
      if (wr_last) nlast++;
    end
  end

  task automatic ld_word(input tt_load_e sel, input int addr, input real v [COLS]);
    @(negedge clk);
    ld_cmd_valid = 1; ld_cmd_sel = sel; ld_cmd_addr = CAW'(addr); ld_cmd_len = 1;
    @(posedge clk); while (!ld_cmd_ready) @(posedge clk);
    @(negedge clk);
    ld_cmd_valid = 0; ld_dvalid = 1;
    foreach (ld_data[l]) ld_data[l] = r2f(v[l]);
    @(posedge clk); while (!ld_dready) @(posedge clk);
    @(negedge clk);
    ld_dvalid = 0;
  endtask

  task automatic load_tt(input int I1, I2, I3, J1, J2, J3);
    real d [COLS];
    int nt1, nt2, n;
    cfg_i[0] = 16'(I1); cfg_i[1] = 16'(I2); cfg_i[2] = 16'(I3);
    cfg_j[0] = 16'(J1); cfg_j[1] = 16'(J2); cfg_j[2] = 16'(J3);
    foreach (G1[a, b, c]) G1[a][b][c] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (G2[a, b, c, e]) G2[a][b][c][e] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (G3[a, b, c]) G3[a][b][c] = real'(int'($urandom_range(8)) - 4) / 8.0;
    // TT_AMem: word i1*R + k holds column k of U1[i1] (J1 <= 16 rows)
    for (int i = 0; i < I1; i++)
      for (int k = 0; k < R; k++) begin
        foreach (d[l]) d[l] = (l < J1) ? G1[i][l][k] : 0.0;
        ld_word(TT_LOAD_A, i*R + k, d);
      end
    // TT_CMem: word cbase + i*R*NT + r*NT + nt holds row r of U[i], lanes
    // nt*32 .. nt*32+31 of its flattened (j, r') columns
    nt1 = (J2*R + COLS - 1) / COLS;
    cfg_cbase[0] = 0;
    cfg_cbase[1] = 16'd2;
    for (int i = 0; i < I2; i++)
      for (int r = 0; r < R; r++)
        for (int nt = 0; nt < nt1; nt++) begin
          foreach (d[l]) begin
            n = nt*COLS + l;
            d[l] = (n < J2*R) ? G2[r][i][n / R][n % R] : 0.0;
          end
          ld_word(TT_LOAD_C, cfg_cbase[1] + i*R*nt1 + r*nt1 + nt, d);
        end
    nt2 = (J3 + COLS - 1) / COLS;
    cfg_cbase[2] = 16'(cfg_cbase[1] + I2*R*nt1);
    for (int i = 0; i < I3; i++)
      for (int r = 0; r < R; r++)
        for (int nt = 0; nt < nt2; nt++) begin
          foreach (d[l]) begin
            n = nt*COLS + l;
            d[l] = (n < J3) ? G3[r][i][n] : 0.0;
          end
          ld_word(TT_LOAD_C, cfg_cbase[2] + i*R*nt2 + r*nt2 + nt, d);
        end
  endtask

  // element e of TT row `row` (exact in real arithmetic)
  function automatic real tt_elem(input int row, input int e);
    int I2, I3, J2, J3, i1, i2, i3, j1, j2, j3;
    real v;
    I2 = cfg_i[1]; I3 = cfg_i[2]; J2 = cfg_j[1]; J3 = cfg_j[2];
    i3 = row % I3; i2 = (row / I3) % I2; i1 = row / (I2*I3);
    j3 = e % J3; j2 = (e / J3) % J2; j1 = e / (J2*J3);
    v = 0.0;
    for (int r1 = 0; r1 < R; r1++)
      for (int r2 = 0; r2 < R; r2++)
        v += G1[i1][j1][r1] * G2[r1][i2][j2][r2] * G3[r2][i3][j3];
    return v;
  endfunction

  int bag_no = 0, exp_dram = 0, exp_tt = 0, exp_ssd = 0, exp_err = 0;

  task automatic run_bag(input int n, input int tt_rows);
    real sum [512];
    int cnt, beats, dev, idx;
    longint base;
    fp32_t e;
    foreach (sum[i]) sum[i] = 0.0;
    cnt = 0;
    beats = (cfg_dim + BW - 1) / BW;
    for (int q = 0; q < n; q++) begin
      int s = $urandom_range(99);
      dev = (s < 35) ? 0 : (s < 65) ? 1 : (s < 96) ? 2 : 3;
      idx = (dev == 1) ? $urandom_range(tt_rows - 1) : $urandom_range(5000);
      if (dev == 0) begin exp_dram++; base = longint'(cfg_dram_base / 4) + longint'(idx) * beats * BW; end
      if (dev == 2) begin exp_ssd++;  base = longint'(cfg_ssd_base / 4) + longint'(idx) * beats * BW; end
      if (dev == 1) exp_tt++;
      if (dev == 3) exp_err++;
      if (dev != 3) cnt++;
      for (int i = 0; i < cfg_dim; i++)
        if (dev == 0) sum[i] += f2r(table_word(0, base + i));
        else if (dev == 2) sum[i] += f2r(table_word(2, base + i));
        else if (dev == 1) sum[i] += tt_elem(idx, i);
      repeat ($urandom_range(2)) @(negedge clk);
      lk_valid = 1; lk_addr.device_id = dev_id_e'(dev); lk_addr.emb_idx = 30'(idx); lk_last = (q == n - 1);
      @(posedge clk); while (!lk_ready) @(posedge clk);
      @(negedge clk);
      lk_valid = 0; lk_last = 0;
    end
    // wait for the bag's result
    while (nlast <= bag_no) @(negedge clk);
    base = longint'(cfg_out_base / 4) + longint'(bag_no) * beats * BW;
    for (int i = 0; i < cfg_dim; i++) begin
      if (cnt == 0) e = 0;
      else if (cfg_avg) e = ref_div(r2f(sum[i]), r2f(real'(cnt)));
      else e = r2f(sum[i]);
      checks++;
      if (!got.exists(base + i) || got[base + i] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL bag %0d elem %0d: %h expected %h", bag_no, i,
                                    got.exists(base + i) ? got[base + i] : 32'hx, e);
      end
    end
    bag_no++;
  endtask

  task automatic check_stats();
    while (busy) @(negedge clk);
    while (busy) @(negedge clk);
    checks += 5;
    if (stat_dram != 32'(exp_dram) || stat_tt != 32'(exp_tt) || stat_ssd != 32'(exp_ssd) ||
        stat_err != 32'(exp_err) || stat_bags != 32'(bag_no)) begin
      failures++;
      $display("FAIL stats dram %0d/%0d tt %0d/%0d ssd %0d/%0d err %0d/%0d bags %0d/%0d",
               stat_dram, exp_dram, stat_tt, exp_tt, stat_ssd, exp_ssd, stat_err, exp_err, stat_bags, bag_no);
    end
    checks++;
    if (n_dram_req != exp_dram || n_ssd_req != exp_ssd) begin
      failures++;
      $display("FAIL memory requests dram %0d/%0d ssd %0d/%0d", n_dram_req, exp_dram, n_ssd_req, exp_ssd);
    end
  endtask

  initial begin
    foreach (ld_data[l]) ld_data[l] = 0;
    lk_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // table 1: dimension 64 = 4*4*4, 64 TT rows, summed
    load_tt(4, 4, 4, 4, 4, 4);
    cfg_dim = 64; cfg_avg = 0;
    for (int b = 0; b < 12; b++) run_bag($urandom_range(1, 8), 64);
    check_stats();
    // table 2: dimension 24 = 2*3*4, 27 TT rows, averaged
    load_tt(3, 3, 3, 2, 3, 4);
    cfg_dim = 24; cfg_avg = 1;
    for (int b = 0; b < 12; b++) run_bag($urandom_range(1, 8), 27);
    run_bag(1, 27);
    check_stats();
    checks++;
    if (stat_stall == 0) begin failures++; $display("FAIL no lookup stalled"); end
    $display("stalls %0d, dram %0d tt %0d ssd %0d invalid %0d", stat_stall, exp_dram, exp_tt, exp_ssd, exp_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
