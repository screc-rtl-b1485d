// tb_mlp_cu: one MLP computation unit against behavioural shared-memory
// read ports (one-cycle latency) and a write port with random grants.
// Each tile uses random inputs (k_dim features x 16 samples), weights
// (8 neurons), biases, valid-row counts and ReLU setting; every written
// word is checked (address y_addr + r, 16 sample values of neuron r) with
// an exact reference: values are multiples of 1/8 so the dot
// products are exact. Also checks the tile latency against the documented
// count when the write port is always granted. The CU behaviour checked
// (8x16 output-stationary tile, bias then ReLU) follows the paper; the
// memory latency, grant pattern and tile sizes are this bench's choices.
module tb_mlp_cu;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int ROWS = 8, COLS = 16, IOAW = 15, WAW = 18, BAW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, relu = 0, busy, done, io_re, w_re, b_re, wr_valid, wr_ready = 1;
  logic [15:0] k_dim = 0;
  logic [IOAW-1:0] x_addr = 0, y_addr = 0, io_raddr, wr_addr;
  logic [WAW-1:0] w_addr = 0, w_raddr;
  logic [BAW-1:0] b_addr = 0, b_raddr;
  logic [3:0] rows = 0;
  fp32_t io_rdata [COLS], w_rdata [ROWS], b_rdata [ROWS], wr_data [COLS];
  int checks = 0, failures = 0;
  mlp_cu dut (.*);

  real X [256][COLS];            // X[k][sample]
  real W [256][ROWS];            // W[k][neuron]
  real Bv [ROWS];
  fp32_t got [ROWS][COLS];
  int nwr;
  logic always_grant = 1;

  always @(posedge clk) begin
    if (io_re) foreach (io_rdata[l]) io_rdata[l] <= r2f(X[int'(io_raddr - x_addr)][l]);
    if (w_re)  foreach (w_rdata[l]) w_rdata[l] <= r2f(W[int'(w_raddr - w_addr)][l]);
    if (b_re)  foreach (b_rdata[l]) b_rdata[l] <= r2f(Bv[l]);
    if (wr_valid && wr_ready) begin
      got[int'(wr_addr - y_addr)] = wr_data;
      nwr++;
    end
    wr_ready <= always_grant ? 1'b1 : ($urandom_range(2) == 0);
  end

  initial begin
    int K, nr, cyc;
    foreach (io_rdata[l]) io_rdata[l] = 0;
    foreach (w_rdata[l]) begin w_rdata[l] = 0; b_rdata[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      K = (t == 0) ? 1 : $urandom_range(1, 200);
      nr = (t % 3 == 0) ? ROWS : $urandom_range(1, ROWS);
      foreach (X[k, s]) X[k][s] = real'(int'($urandom_range(16)) - 8) / 8.0;
      foreach (W[k, r]) W[k][r] = real'(int'($urandom_range(16)) - 8) / 8.0;
      foreach (Bv[r]) Bv[r] = real'(int'($urandom_range(16)) - 8) / 8.0;
      always_grant = (t % 2 == 0);
      @(negedge clk);
      start = 1; k_dim = 16'(K); rows = 4'(nr); relu = (t % 4 < 2);
      x_addr = IOAW'($urandom_range(1000)); w_addr = WAW'($urandom_range(1000));
      b_addr = BAW'($urandom_range(100)); y_addr = IOAW'(2000 + $urandom_range(1000));
      nwr = 0;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (always_grant) begin
        // 1 clear + 1 bias read + K feed + 1 read latency + drain + one per row
        checks++;
        if (cyc > 1 + 1 + K + 1 + ROWS + COLS - 1 + nr + 2) begin
          failures++; $display("FAIL tile latency %0d cycles for k=%0d rows=%0d", cyc, K, nr);
        end
      end
      checks++;
      if (nwr != nr) begin failures++; $display("FAIL %0d rows written, expected %0d", nwr, nr); end
      for (int r = 0; r < nr; r++)
        for (int s = 0; s < COLS; s++) begin
          real y;
          y = Bv[r];
          for (int k = 0; k < K; k++) y += W[k][r] * X[k][s];
          if (relu && y < 0.0) y = 0.0;
          checks++;
          if (got[r][s] !== r2f(y)) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d neuron %0d sample %0d: %h expected %h", t, r, s, got[r][s], r2f(y));
          end
        end
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
