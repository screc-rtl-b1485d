// tb_mlp_core: runs a small three-layer MLP through one MLP core at its
// default size and checks every output neuron of every sample. Layer 1
// (13 -> 24, ReLU) uses latency mode, layer 2 (24 -> 40, ReLU) throughput
// mode, layer 3 (40 -> 1, no ReLU) latency mode again, with a batch of 40
// samples so that both the neuron and the batch tiles are partly filled.
// Weights, biases and inputs go in through DMA write bursts in the
// documented word layouts, each layer reads the previous layer's output
// in place in IOMem, and the results come back through DMA read bursts.
// Values are small multiples of 1/8 so every dot product is exact and the
// reference (real arithmetic) is independent of summation order. Also
// checks the round count of the top controller for each mode, and the
// interconnect mode output.
module tb_mlp_core;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int NCU = 4, ROWS = 8, COLS = 16, B = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dma_cmd_valid = 0, dma_cmd_ready, dma_cmd_write = 0;
  mlp_mem_e dma_cmd_sel = MEM_IO;
  logic [19:0] dma_cmd_addr = 0, dma_cmd_len = 0;
  logic dma_in_valid = 0, dma_in_ready, dma_out_valid, dma_out_ready = 0;
  fp32_t dma_in_data [COLS];
  fp32_t dma_out_data [COLS];
  logic layer_valid = 0, layer_ready, layer_done, busy;
  mlp_layer_t layer;
  mlp_mode_e mode;
  logic [31:0] stat_rounds;
  int checks = 0, failures = 0;

  mlp_core dut (.*);

  real act [B][64];          // current activations, act[sample][feature]
  fp32_t rd [64][COLS];
  int n_lat = 0, n_thr = 0, n_relu_cut = 0;

  task automatic dma_cmd(input logic wr, input mlp_mem_e sel, input int addr, input int len);
    @(negedge clk);
    dma_cmd_valid = 1; dma_cmd_write = wr; dma_cmd_sel = sel;
    dma_cmd_addr = 20'(addr); dma_cmd_len = 20'(len);
    @(posedge clk); while (!dma_cmd_ready) @(posedge clk);
    @(negedge clk);
    dma_cmd_valid = 0;
  endtask

  task automatic dma_word(input real v [COLS]);
    dma_in_valid = 1;
    foreach (dma_in_data[l]) dma_in_data[l] = r2f(v[l]);
    @(posedge clk); while (!dma_in_ready) @(posedge clk);
    @(negedge clk);
    dma_in_valid = 0;
    if ($urandom_range(3) == 0) @(negedge clk);
  endtask

  task automatic dma_read(input int addr, input int len);
    dma_cmd(0, MEM_IO, addr, len);
    for (int w = 0; w < len; w++) begin
      dma_out_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      while (!(dma_out_valid && dma_out_ready)) begin
        @(negedge clk); dma_out_ready = ($urandom_range(2) != 0); @(posedge clk);
      end
      rd[w] = dma_out_data;
      @(negedge clk);
      dma_out_ready = 0;
    end
  endtask

  // one layer: in -> out neurons; inputs at x_base, outputs at y_base
  task automatic run_layer(input int in_dim, input int out_dim, input int x_base, input int y_base,
                           input int w_base, input int b_base, input logic relu, input mlp_mode_e md);
    real W [64][64];
    real bias [64];
    real y [B][64];
    real d [COLS];
    int ot_n, bt_n, rounds0, exp_rounds;
    foreach (W[o, k]) W[o][k] = real'(int'($urandom_range(8)) - 4) / 8.0;
    foreach (bias[o]) bias[o] = real'(int'($urandom_range(16)) - 8) / 8.0;
    ot_n = (out_dim + ROWS - 1) / ROWS;
    bt_n = (B + COLS - 1) / COLS;
    // WMem word w_base + ot*in_dim + k: lanes 0..7 = W[ot*8 + l][k]
    dma_cmd(1, MEM_W, w_base, ot_n * in_dim);
    for (int ot = 0; ot < ot_n; ot++)
      for (int k = 0; k < in_dim; k++) begin
        foreach (d[l]) d[l] = (l < ROWS && ot*ROWS + l < out_dim) ? W[ot*ROWS + l][k] : 0.0;
        dma_word(d);
      end
    // BMem word b_base + ot: lanes 0..7 = bias[ot*8 + l]
    dma_cmd(1, MEM_B, b_base, ot_n);
    for (int ot = 0; ot < ot_n; ot++) begin
      foreach (d[l]) d[l] = (l < ROWS && ot*ROWS + l < out_dim) ? bias[ot*ROWS + l] : 0.0;
      dma_word(d);
    end
    // run
    rounds0 = stat_rounds;
    @(negedge clk);
    layer = '0;
    layer.in_dim = 16'(in_dim); layer.out_dim = 16'(out_dim); layer.batch = 16'(B);
    layer.x_base = 20'(x_base); layer.y_base = 20'(y_base);
    layer.w_base = 20'(w_base); layer.b_base = 20'(b_base);
    layer.relu = relu; layer.mode = md;
    layer_valid = 1;
    @(posedge clk); while (!layer_ready) @(posedge clk);
    @(negedge clk);
    layer_valid = 0;
    checks++;
    if (mode != md) begin failures++; $display("FAIL interconnect mode %0d expected %0d", mode, md); end
    while (!layer_done) @(negedge clk);
    exp_rounds = (md == MODE_LATENCY) ? bt_n * ((ot_n + NCU - 1) / NCU) : ot_n * ((bt_n + NCU - 1) / NCU);
    checks++;
    if (stat_rounds - rounds0 != exp_rounds) begin
      failures++;
      $display("FAIL rounds %0d expected %0d", stat_rounds - rounds0, exp_rounds);
    end
    if (md == MODE_LATENCY) n_lat++; else n_thr++;
    // reference
    for (int s = 0; s < B; s++)
      for (int o = 0; o < out_dim; o++) begin
        y[s][o] = bias[o];
        for (int k = 0; k < in_dim; k++) y[s][o] += W[o][k] * act[s][k];
        if (relu && y[s][o] < 0.0) begin y[s][o] = 0.0; n_relu_cut++; end
      end
    // read back: IOMem word y_base + bt*out_dim + o = neuron o of samples bt*16..
    for (int bt = 0; bt < bt_n; bt++) begin
      dma_read(y_base + bt*out_dim, out_dim);
      for (int o = 0; o < out_dim; o++)
        for (int l = 0; l < COLS; l++)
          if (bt*COLS + l < B) begin
            checks++;
            if (rd[o][l] !== r2f(y[bt*COLS + l][o])) begin
              failures++;
              if (failures < 10) $display("FAIL layer %0d->%0d sample %0d neuron %0d: %h expected %h",
                                          in_dim, out_dim, bt*COLS + l, o, rd[o][l], r2f(y[bt*COLS + l][o]));
            end
          end
    end
    foreach (act[s, k]) act[s][k] = (k < out_dim) ? y[s][k] : 0.0;
  endtask

  initial begin
    real d [COLS];
    foreach (dma_in_data[l]) dma_in_data[l] = 0;
    layer = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // inputs: 13 dense features of 40 samples, IOMem word bt*13 + k
    foreach (act[s, k]) act[s][k] = (k < 13) ? real'(int'($urandom_range(16)) - 8) / 8.0 : 0.0;
    dma_cmd(1, MEM_IO, 0, 3 * 13);
    for (int bt = 0; bt < 3; bt++)
      for (int k = 0; k < 13; k++) begin
        foreach (d[l]) d[l] = (bt*COLS + l < B) ? act[bt*COLS + l][k] : 0.0;
        dma_word(d);
      end
    run_layer(13, 24, 0, 1000, 0, 0, 1, MODE_LATENCY);
    run_layer(24, 40, 1000, 2000, 5000, 100, 1, MODE_THROUGHPUT);
    run_layer(40, 1, 2000, 3000, 9000, 200, 0, MODE_LATENCY);
    checks++;
    if (n_lat == 0 || n_thr == 0 || n_relu_cut == 0) begin
      failures++;
      $display("FAIL mechanisms: latency %0d throughput %0d relu %0d", n_lat, n_thr, n_relu_cut);
    end
    $display("layers latency %0d throughput %0d, relu zeroed %0d, rounds %0d", n_lat, n_thr, n_relu_cut, stat_rounds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
