// tb_screc_top: end-to-end test of the whole system at its default size
// (5 EMB SmartSSDs, 3 MLP SmartSSDs, no parameter overrides), acting as
// the host. One inference batch of 48 samples:
//  1. every EMB device gets the same TT-compressed table part (2x2x4 rows
//     of dimension 16 = 2*2*4, rank 4) through its DMA loader;
//  2. each EMB device pools one bag per sample from its own table, over
//     FPGA DRAM, TT and SSD rows (behavioural DRAM and SSD models with
//     random latency), devices 0-3 summing and device 4 averaging bags of
//     1, 2 or 4 lookups; every pooled vector is checked exactly;
//  3. the host concatenates the five pooled vectors of each sample into an
//     80-feature input and sends 16 samples to each MLP device;
//  4. each MLP device runs 80 -> 24 (ReLU) in latency mode and 24 -> 1 in
//     throughput mode; outputs are compared with a real-arithmetic
//     reference within a tight relative bound.
// It counts the mechanisms of the design: lookups stalled on a busy tier,
// lookups served by each tier, invalid device codes, average pooling,
// interconnect mode switches and ReLU clipping, and fails if any of them
// never happened.
module tb_screc_top;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int NE = 5, NM = 3, COLS = 32, K = 3, BW = 16, CAW = 16, MC = 16;
  localparam int DIM = 16, S = 48, F = NE * DIM, H = 24;
  localparam int I1 = 2, I2 = 2, I3 = 4, J1 = 2, J2 = 2, J3 = 4, R = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0]    e_cfg_dim [NE];
  logic           e_cfg_avg [NE];
  logic [63:0]    e_cfg_dram_base [NE], e_cfg_ssd_base [NE], e_cfg_out_base [NE];
  logic [15:0]    e_cfg_i [NE][K], e_cfg_j [NE][K];
  logic [CAW-1:0] e_cfg_cbase [NE][K];
  logic           e_lk_valid [NE], e_lk_ready [NE], e_lk_last [NE];
  remap_addr_t    e_lk_addr [NE];
  logic           e_ld_cmd_valid [NE], e_ld_cmd_ready [NE], e_ld_dvalid [NE], e_ld_dready [NE];
  tt_load_e       e_ld_cmd_sel [NE];
  logic [CAW-1:0] e_ld_cmd_addr [NE];
  logic [CAW:0]   e_ld_cmd_len [NE];
  fp32_t          e_ld_data [NE][COLS];
  logic           e_dram_req_valid [NE], e_dram_req_ready [NE], e_dram_rsp_valid [NE];
  logic           e_ssd_req_valid [NE], e_ssd_req_ready [NE], e_ssd_rsp_valid [NE];
  logic [63:0]    e_dram_req_addr [NE], e_ssd_req_addr [NE], e_wr_addr [NE];
  logic [7:0]     e_dram_req_beats [NE], e_ssd_req_beats [NE];
  fp32_t          e_dram_rsp_data [NE][BW], e_ssd_rsp_data [NE][BW], e_wr_data [NE][BW];
  logic           e_wr_valid [NE], e_wr_ready [NE], e_wr_last [NE], e_busy [NE];
  logic [31:0]    e_stat_dram [NE], e_stat_tt [NE], e_stat_ssd [NE], e_stat_stall [NE],
                  e_stat_err [NE], e_stat_bags [NE];
  logic           m_dma_cmd_valid [NM], m_dma_cmd_ready [NM], m_dma_cmd_write [NM];
  mlp_mem_e       m_dma_cmd_sel [NM];
  logic [19:0]    m_dma_cmd_addr [NM], m_dma_cmd_len [NM];
  logic           m_dma_in_valid [NM], m_dma_in_ready [NM], m_dma_out_valid [NM], m_dma_out_ready [NM];
  fp32_t          m_dma_in_data [NM][MC], m_dma_out_data [NM][MC];
  logic           m_layer_valid [NM], m_layer_ready [NM], m_layer_done [NM], m_busy [NM];
  mlp_layer_t     m_layer [NM];
  mlp_mode_e      m_mode [NM];
  logic [31:0]    m_stat_rounds [NM];
  int n_dram_req [NE], n_ssd_req [NE];
  int checks = 0, failures = 0;

  screc_top dut (.*);

  for (genvar d = 0; d < NE; d++) begin : g_mem
    tb_emb_mem_model #(.TIER(0), .LAT_MIN(2), .LAT_MAX(12)) u_dram (
      .clk, .req_valid(e_dram_req_valid[d]), .req_ready(e_dram_req_ready[d]), .req_addr(e_dram_req_addr[d]),
      .req_beats(e_dram_req_beats[d]), .rsp_valid(e_dram_rsp_valid[d]), .rsp_data(e_dram_rsp_data[d]),
      .n_req(n_dram_req[d]));
    tb_emb_mem_model #(.TIER(2), .LAT_MIN(20), .LAT_MAX(60)) u_ssd (
      .clk, .req_valid(e_ssd_req_valid[d]), .req_ready(e_ssd_req_ready[d]), .req_addr(e_ssd_req_addr[d]),
      .req_beats(e_ssd_req_beats[d]), .rsp_valid(e_ssd_rsp_valid[d]), .rsp_data(e_ssd_rsp_data[d]),
      .n_req(n_ssd_req[d]));
  end

  real G1 [I1][J1][R];
  real G2 [R][I2][J2][R];
  real G3 [R][I3][J3];
  fp32_t got [NE][longint];
  int nlast [NE];
  real pooled [S][F];                // what the EMB devices returned (checked)
  int n_err = 0, n_avg = 0, n_relu = 0, n_switch = 0;

  always @(posedge clk)
    for (int d = 0; d < NE; d++) begin
      e_wr_ready[d] <= ($urandom_range(4) != 0);
      if (e_wr_valid[d] && e_wr_ready[d]) begin
        for (int l = 0; l < BW; l++) got[d][longint'(e_wr_addr[d] / 4) + l] = e_wr_data[d][l];
        if (e_wr_last[d]) nlast[d]++;
      end
    end

  mlp_mode_e last_mode [NM];
  always @(posedge clk)
    for (int m = 0; m < NM; m++) begin
      if (rst_n && m_mode[m] != last_mode[m]) n_switch++;
      last_mode[m] <= m_mode[m];
    end

  // ---------------------------------------------------------------- EMB side
  task automatic ld_word(input int d, input tt_load_e sel, input int addr, input real v [COLS]);
    @(negedge clk);
    e_ld_cmd_valid[d] = 1; e_ld_cmd_sel[d] = sel; e_ld_cmd_addr[d] = CAW'(addr); e_ld_cmd_len[d] = 1;
    @(posedge clk); while (!e_ld_cmd_ready[d]) @(posedge clk);
    @(negedge clk);
    e_ld_cmd_valid[d] = 0; e_ld_dvalid[d] = 1;
    for (int l = 0; l < COLS; l++) e_ld_data[d][l] = r2f(v[l]);
    @(posedge clk); while (!e_ld_dready[d]) @(posedge clk);
    @(negedge clk);
    e_ld_dvalid[d] = 0;
  endtask

  // TT_AMem word i1*R + k: column k of U1[i1]; TT_CMem word
  // cbase + i*R + r: row r of U[i] (one word each here)
  task automatic load_tt(input int d);
    real v [COLS];
    for (int i = 0; i < I1; i++)
      for (int k = 0; k < R; k++) begin
        foreach (v[l]) v[l] = (l < J1) ? G1[i][l][k] : 0.0;
        ld_word(d, TT_LOAD_A, i*R + k, v);
      end
    for (int i = 0; i < I2; i++)
      for (int r = 0; r < R; r++) begin
        foreach (v[l]) v[l] = (l < J2*R) ? G2[r][i][l / R][l % R] : 0.0;
        ld_word(d, TT_LOAD_C, 1 + i*R + r, v);
      end
    for (int i = 0; i < I3; i++)
      for (int r = 0; r < R; r++) begin
        foreach (v[l]) v[l] = (l < J3) ? G3[r][i][l] : 0.0;
        ld_word(d, TT_LOAD_C, 1 + I2*R + i*R + r, v);
      end
  endtask

  function automatic real tt_elem(input int row, input int e);
    int i1, i2, i3, j1, j2, j3;
    real v;
    i3 = row % I3; i2 = (row / I3) % I2; i1 = row / (I2*I3);
    j3 = e % J3; j2 = (e / J3) % J2; j1 = e / (J2*J3);
    v = 0.0;
    for (int r1 = 0; r1 < R; r1++)
      for (int r2 = 0; r2 < R; r2++) v += G1[i1][j1][r1] * G2[r1][i2][j2][r2] * G3[r2][i3][j3];
    return v;
  endfunction

  task automatic emb_device(input int d);
    real sum [DIM];
    int n, cnt, dev, idx;
    longint base;
    fp32_t e;
    load_tt(d);
    for (int s = 0; s < S; s++) begin
      foreach (sum[i]) sum[i] = 0.0;
      cnt = 0;
      n = e_cfg_avg[d] ? (1 << $urandom_range(2)) : $urandom_range(1, 6);
      for (int q = 0; q < n; q++) begin
        int u = $urandom_range(99);
        dev = (u < 35) ? 0 : (u < 65) ? 1 : 2;
        if (!e_cfg_avg[d] && u >= 97) dev = 3;
        idx = (dev == 1) ? $urandom_range(I1*I2*I3 - 1) : $urandom_range(100000);
        if (dev != 3) cnt++; else n_err++;
        base = longint'(((dev == 0) ? e_cfg_dram_base[d] : e_cfg_ssd_base[d]) / 4) + longint'(idx) * BW;
        for (int i = 0; i < DIM; i++)
          if (dev == 0) sum[i] += f2r(table_word(0, base + i));
          else if (dev == 2) sum[i] += f2r(table_word(2, base + i));
          else if (dev == 1) sum[i] += tt_elem(idx, i);
        repeat ($urandom_range(2)) @(negedge clk);
        e_lk_valid[d] = 1; e_lk_addr[d].device_id = dev_id_e'(dev); e_lk_addr[d].emb_idx = 30'(idx);
        e_lk_last[d] = (q == n - 1);
        @(posedge clk); while (!e_lk_ready[d]) @(posedge clk);
        @(negedge clk);
        e_lk_valid[d] = 0; e_lk_last[d] = 0;
      end
      while (nlast[d] <= s) @(negedge clk);
      if (e_cfg_avg[d]) n_avg++;
      base = longint'(e_cfg_out_base[d] / 4) + longint'(s) * BW;
      for (int i = 0; i < DIM; i++) begin
        e = (cnt == 0) ? 32'd0 : e_cfg_avg[d] ? r2f(sum[i] / real'(cnt)) : r2f(sum[i]);
        checks++;
        if (!got[d].exists(base + i) || got[d][base + i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL EMB device %0d sample %0d elem %0d", d, s, i);
        end
        pooled[s][d*DIM + i] = got[d].exists(base + i) ? f2r(got[d][base + i]) : 0.0;
      end
    end
  endtask

  // ---------------------------------------------------------------- MLP side
  task automatic m_cmd(input int m, input logic wr, input mlp_mem_e sel, input int addr, input int len);
    @(negedge clk);
    m_dma_cmd_valid[m] = 1; m_dma_cmd_write[m] = wr; m_dma_cmd_sel[m] = sel;
    m_dma_cmd_addr[m] = 20'(addr); m_dma_cmd_len[m] = 20'(len);
    @(posedge clk); while (!m_dma_cmd_ready[m]) @(posedge clk);
    @(negedge clk);
    m_dma_cmd_valid[m] = 0;
  endtask

  task automatic m_word(input int m, input real v [MC]);
    m_dma_in_valid[m] = 1;
    for (int l = 0; l < MC; l++) m_dma_in_data[m][l] = r2f(v[l]);
    @(posedge clk); while (!m_dma_in_ready[m]) @(posedge clk);
    @(negedge clk);
    m_dma_in_valid[m] = 0;
  endtask

  task automatic m_layer_run(input int m, input int in_dim, input int out_dim, input int x_base,
                             input int y_base, input int w_base, input int b_base, input logic relu,
                             input mlp_mode_e md);
    @(negedge clk);
    m_layer[m] = '0;
    m_layer[m].in_dim = 16'(in_dim); m_layer[m].out_dim = 16'(out_dim); m_layer[m].batch = 16'(MC);
    m_layer[m].x_base = 20'(x_base); m_layer[m].y_base = 20'(y_base);
    m_layer[m].w_base = 20'(w_base); m_layer[m].b_base = 20'(b_base);
    m_layer[m].relu = relu; m_layer[m].mode = md;
    m_layer_valid[m] = 1;
    @(posedge clk); while (!m_layer_ready[m]) @(posedge clk);
    @(negedge clk);
    m_layer_valid[m] = 0;
    while (!m_layer_done[m]) @(negedge clk);
  endtask

  real W1 [H][F], B1 [H], W2 [H], B2;

  task automatic mlp_device(input int m);
    real v [MC];
    real h [MC][H], y, mag;
    fp32_t out [H][MC];
    // weights: WMem word ot*F + k (lanes = 8 neurons), then layer 2 at 1000
    m_cmd(m, 1, MEM_W, 0, 3 * F);
    for (int ot = 0; ot < 3; ot++)
      for (int k = 0; k < F; k++) begin
        foreach (v[l]) v[l] = (l < 8) ? W1[ot*8 + l][k] : 0.0;
        m_word(m, v);
      end
    m_cmd(m, 1, MEM_W, 1000, H);
    for (int k = 0; k < H; k++) begin
      foreach (v[l]) v[l] = (l == 0) ? W2[k] : 0.0;
      m_word(m, v);
    end
    m_cmd(m, 1, MEM_B, 0, 4);
    for (int ot = 0; ot < 4; ot++) begin
      foreach (v[l]) v[l] = (l >= 8) ? 0.0 : (ot < 3) ? B1[ot*8 + l] : (l == 0) ? B2 : 0.0;
      m_word(m, v);
    end
    // inputs: samples m*16 .. m*16+15, IOMem word k = feature k
    m_cmd(m, 1, MEM_IO, 0, F);
    for (int k = 0; k < F; k++) begin
      foreach (v[l]) v[l] = pooled[m*MC + l][k];
      m_word(m, v);
    end
    m_layer_run(m, F, H, 0, 200, 0, 0, 1, MODE_LATENCY);
    m_layer_run(m, H, 1, 200, 200 + H, 1000, 3, 0, MODE_THROUGHPUT);
    // read hidden layer and output
    m_cmd(m, 0, MEM_IO, 200, H + 1);
    for (int w = 0; w < H + 1; w++) begin
      m_dma_out_ready[m] = 1;
      @(posedge clk); while (!m_dma_out_valid[m]) @(posedge clk);
      if (w < H) foreach (out[w][l]) out[w][l] = m_dma_out_data[m][l];
      else for (int l = 0; l < MC; l++) begin
        // output neuron, checked against the hidden values the device produced
        y = B2; mag = (B2 < 0) ? -B2 : B2;
        for (int k = 0; k < H; k++) begin
          y += W2[k] * f2r(out[k][l]);
          mag += ((W2[k] < 0) ? -W2[k] : W2[k]) * ((f2r(out[k][l]) < 0) ? -f2r(out[k][l]) : f2r(out[k][l]));
        end
        checks++;
        if ((f2r(m_dma_out_data[m][l]) - y > mag * 1e-6) || (y - f2r(m_dma_out_data[m][l]) > mag * 1e-6)) begin
          failures++;
          $display("FAIL MLP device %0d sample %0d output %f expected %f", m, l, f2r(m_dma_out_data[m][l]), y);
        end
      end
      @(negedge clk);
      m_dma_out_ready[m] = 0;
    end
    // hidden layer against the pooled inputs
    for (int l = 0; l < MC; l++)
      for (int o = 0; o < H; o++) begin
        y = B1[o]; mag = (B1[o] < 0) ? -B1[o] : B1[o];
        for (int k = 0; k < F; k++) begin
          y += W1[o][k] * pooled[m*MC + l][k];
          mag += ((W1[o][k] < 0) ? -W1[o][k] : W1[o][k]) * ((pooled[m*MC + l][k] < 0) ? -pooled[m*MC + l][k] : pooled[m*MC + l][k]);
        end
        if (y < 0.0) begin y = 0.0; n_relu++; end
        checks++;
        if ((f2r(out[o][l]) - y > mag * 1e-6) || (y - f2r(out[o][l]) > mag * 1e-6)) begin
          failures++;
          if (failures < 10) $display("FAIL MLP device %0d sample %0d hidden %0d: %f expected %f", m, l, o, f2r(out[o][l]), y);
        end
      end
  endtask

  task automatic count(input string what, input int n);
    checks++;
    $display("%s: %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL %s never happened", what); end
  endtask

  int tot_stall, tot_dram, tot_tt, tot_ssd, tot_err;

  initial begin
    for (int d = 0; d < NE; d++) begin
      e_cfg_dim[d] = DIM; e_cfg_avg[d] = (d == NE - 1);
      e_cfg_dram_base[d] = 64'h1000_0000 * (d + 1); e_cfg_ssd_base[d] = 64'h8_0000_0000 + 64'h1000_0000 * d;
      e_cfg_out_base[d] = 64'h100_0000 * (d + 1);
      e_cfg_i[d][0] = I1; e_cfg_i[d][1] = I2; e_cfg_i[d][2] = I3;
      e_cfg_j[d][0] = J1; e_cfg_j[d][1] = J2; e_cfg_j[d][2] = J3;
      e_cfg_cbase[d][0] = 0; e_cfg_cbase[d][1] = 1; e_cfg_cbase[d][2] = CAW'(1 + I2*R);
      e_lk_valid[d] = 0; e_lk_last[d] = 0; e_lk_addr[d] = '0;
      e_ld_cmd_valid[d] = 0; e_ld_dvalid[d] = 0; e_ld_cmd_sel[d] = TT_LOAD_A;
      e_ld_cmd_addr[d] = 0; e_ld_cmd_len[d] = 0;
      for (int l = 0; l < COLS; l++) e_ld_data[d][l] = 0;
      nlast[d] = 0;
    end
    for (int m = 0; m < NM; m++) begin
      m_dma_cmd_valid[m] = 0; m_dma_cmd_write[m] = 0; m_dma_cmd_sel[m] = MEM_IO;
      m_dma_cmd_addr[m] = 0; m_dma_cmd_len[m] = 0; m_dma_in_valid[m] = 0; m_dma_out_ready[m] = 0;
      for (int l = 0; l < MC; l++) m_dma_in_data[m][l] = 0;
      m_layer_valid[m] = 0; m_layer[m] = '0; last_mode[m] = MODE_LATENCY;
    end
    foreach (G1[a, b, c]) G1[a][b][c] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (G2[a, b, c, e]) G2[a][b][c][e] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (G3[a, b, c]) G3[a][b][c] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (W1[o, k]) W1[o][k] = real'(int'($urandom_range(8)) - 4) / 16.0;
    foreach (B1[o]) B1[o] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (W2[k]) W2[k] = real'(int'($urandom_range(8)) - 4) / 8.0;
    B2 = 0.25;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // embedding layer on the EMB devices, in parallel
    fork
      emb_device(0); emb_device(1); emb_device(2); emb_device(3); emb_device(4);
    join
    for (int d = 0; d < NE; d++) while (e_busy[d]) @(negedge clk);
    // MLP layers on the MLP devices, in parallel
    fork
      mlp_device(0); mlp_device(1); mlp_device(2);
    join
    tot_stall = 0; tot_dram = 0; tot_tt = 0; tot_ssd = 0; tot_err = 0;
    for (int d = 0; d < NE; d++) begin
      tot_stall += e_stat_stall[d]; tot_dram += e_stat_dram[d]; tot_tt += e_stat_tt[d];
      tot_ssd += e_stat_ssd[d]; tot_err += e_stat_err[d];
      checks++;
      if (e_stat_bags[d] != S || n_dram_req[d] != e_stat_dram[d] || n_ssd_req[d] != e_stat_ssd[d]) begin
        failures++;
        $display("FAIL EMB device %0d: bags %0d, DRAM requests %0d/%0d, SSD requests %0d/%0d", d,
                 e_stat_bags[d], n_dram_req[d], e_stat_dram[d], n_ssd_req[d], e_stat_ssd[d]);
      end
    end
    checks++;
    if (tot_err != n_err) begin failures++; $display("FAIL invalid lookups %0d expected %0d", tot_err, n_err); end
    count("lookups stalled on a busy tier", tot_stall);
    count("lookups from FPGA DRAM", tot_dram);
    count("lookups from TT cores", tot_tt);
    count("lookups from SSD", tot_ssd);
    count("lookups with invalid device code", tot_err);
    count("bags averaged", n_avg);
    count("interconnect mode switches", n_switch);
    count("ReLU clipped outputs", n_relu);
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
