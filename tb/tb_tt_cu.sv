// tb_tt_cu: loads random TT-cores (3 cores, rank 4) into the TT computation
// unit in the documented memory layouts, requests random embedding rows
// and compares every element of each reconstructed vector with a reference
// TT chain computed here from the cores (same summation order). Covers a
// 64-wide table (4x4x4, single tiles) and a 512-wide one (8x8x8, several
// row tiles in the second step), and out_ready back-pressure.
module tb_tt_cu;
  import tb_fp_pkg::*;
  import screc_pkg::*;
  localparam int ROWS = 16, COLS = 32, R = 4, K = 3;
  localparam int MAXI = 8, MAXJ = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_we = 0;
  tt_load_e ld_sel = TT_LOAD_A;
  logic [15:0] ld_addr = 0;
  fp32_t ld_data [COLS];
  logic [15:0] cfg_i [K], cfg_j [K], cfg_cbase [K];
  logic req_valid = 0, req_ready, busy, out_valid, out_ready = 1, out_last;
  logic [29:0] req_row = 0;
  logic [15:0] out_base;
  fp32_t out_data [COLS];
  logic out_mask [COLS];
  int checks = 0, failures = 0;

  tt_cu dut (.clk, .rst_n, .ld_we, .ld_sel, .ld_addr, .ld_data, .cfg_i, .cfg_j, .cfg_cbase,
             .req_valid, .req_ready, .req_row, .busy,
             .out_valid, .out_ready, .out_base, .out_data, .out_mask, .out_last);

  fp32_t G1 [MAXI][MAXJ][R];
  fp32_t G2 [R][MAXI][MAXJ][R];
  fp32_t G3 [R][MAXI][MAXJ];
  fp32_t got [512];
  int nlast;

  task automatic wr(input tt_load_e sel, input int addr, input fp32_t d [COLS]);
    @(negedge clk);
    ld_we = 1; ld_sel = sel; ld_addr = 16'(addr); ld_data = d;
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic load(input int I1, I2, I3, J1, J2, J3);
    fp32_t d [COLS];
    int mt_n, nt1, nt2, n;
    cfg_i[0] = 16'(I1); cfg_i[1] = 16'(I2); cfg_i[2] = 16'(I3);
    cfg_j[0] = 16'(J1); cfg_j[1] = 16'(J2); cfg_j[2] = 16'(J3);
    foreach (G1[a, b, c]) G1[a][b][c] = rand_fp(3, 3);
    foreach (G2[a, b, c, e]) G2[a][b][c][e] = rand_fp(3, 3);
    foreach (G3[a, b, c]) G3[a][b][c] = rand_fp(3, 3);
    mt_n = (J1 + ROWS - 1) / ROWS;
    for (int i = 0; i < I1; i++)
      for (int k = 0; k < R; k++)
        for (int mt = 0; mt < mt_n; mt++) begin
          foreach (d[l]) d[l] = (l < ROWS && mt*ROWS + l < J1) ? G1[i][mt*ROWS + l][k] : 0;
          wr(TT_LOAD_A, i*R*mt_n + k*mt_n + mt, d);
        end
    nt1 = (J2*R + COLS - 1) / COLS;
    cfg_cbase[0] = 0;
    cfg_cbase[1] = 16'd5;                       // arbitrary base offsets
    for (int i = 0; i < I2; i++)
      for (int r = 0; r < R; r++)
        for (int nt = 0; nt < nt1; nt++) begin
          foreach (d[l]) begin
            n = nt*COLS + l;
            d[l] = (n < J2*R) ? G2[r][i][n / R][n % R] : 0;
          end
          wr(TT_LOAD_C, cfg_cbase[1] + i*R*nt1 + r*nt1 + nt, d);
        end
    nt2 = (J3 + COLS - 1) / COLS;
    cfg_cbase[2] = 16'(cfg_cbase[1] + I2*R*nt1 + 3);
    for (int i = 0; i < I3; i++)
      for (int r = 0; r < R; r++)
        for (int nt = 0; nt < nt2; nt++) begin
          foreach (d[l]) begin
            n = nt*COLS + l;
            d[l] = (n < J3) ? G3[r][i][n] : 0;
          end
          wr(TT_LOAD_C, cfg_cbase[2] + i*R*nt2 + r*nt2 + nt, d);
        end
  endtask

  // collect output beats
  always @(posedge clk) begin
    out_ready <= ($urandom_range(3) != 0);
    if (out_valid && out_ready) begin
      for (int l = 0; l < COLS; l++) if (out_mask[l]) got[out_base + l] = out_data[l];
      if (out_last) nlast++;
    end
  end

  task automatic lookup(input int I1, I2, I3, J1, J2, J3, input int row);
    fp32_t T1 [MAXJ][MAXJ*R];
    fp32_t v;
    int i1, i2, i3, J;
    J = J1*J2*J3;
    i3 = row % I3; i2 = (row / I3) % I2; i1 = row / (I2*I3);
    foreach (got[e]) got[e] = 32'hdead_beef;
    nlast = 0;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_row = 30'(row);
    @(negedge clk);
    req_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int j1 = 0; j1 < J1; j1++)
      for (int n = 0; n < J2*R; n++) begin
        T1[j1][n] = 0;
        for (int r = 0; r < R; r++) T1[j1][n] = ref_add(T1[j1][n], ref_mul(G1[i1][j1][r], G2[r][i2][n / R][n % R]));
      end
    for (int e = 0; e < J; e++) begin
      int m, j3, fl;
      m = e / J3; j3 = e % J3;
      v = 0;
      for (int r = 0; r < R; r++) begin
        fl = m*R + r;                           // reshape: flat order kept
        v = ref_add(v, ref_mul(T1[fl / (J2*R)][fl % (J2*R)], G3[r][i3][j3]));
      end
      checks++;
      if (got[e] !== v) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d elem %0d: %h expected %h", row, e, got[e], v);
      end
    end
    checks++;
    if (nlast != 1) begin
      failures++;
      $display("FAIL out_last seen %0d times", nlast);
    end
  endtask

  initial begin
    foreach (ld_data[l]) ld_data[l] = 0;
    foreach (cfg_i[k]) begin cfg_i[k] = 1; cfg_j[k] = 1; cfg_cbase[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(6, 5, 7, 4, 4, 4);
    for (int t = 0; t < 6; t++) lookup(6, 5, 7, 4, 4, 4, (t == 0) ? 0 : (t == 1) ? 6*5*7 - 1 : $urandom_range(6*5*7 - 1));
    load(3, 8, 5, 8, 8, 8);
    for (int t = 0; t < 4; t++) lookup(3, 8, 5, 8, 8, 8, $urandom_range(3*8*5 - 1));
    load(8, 3, 2, 2, 8, 4);
    for (int t = 0; t < 4; t++) lookup(8, 3, 2, 2, 8, 4, $urandom_range(8*3*2 - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
