// tb_tt_bmem: writes random masked 32-lane rows at random flat indices of
// both banks, then reads random (row, rank column) windows of 16 rows and
// checks rdata[r] = element (row + r, k) = flat index (row + r)*4 + k of
// the chosen bank, with indices past the depth reading as zero; the other
// bank must be untouched by writes.
module tb_tt_bmem;
  import screc_pkg::*;
  localparam int DEPTH = 2048, WL = 32, RL = 16, RANK = 4, AW = 11;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [AW:0] wr_base = 0, rd_row = 0;
  logic [1:0] rd_k = 0;
  fp32_t wr_data [WL], rdata [RL];
  logic wr_mask [WL];
  fp32_t model [2][DEPTH];
  int checks = 0, failures = 0;
  tt_bmem dut (.*);

  initial begin
    foreach (wr_data[l]) begin wr_data[l] = 0; wr_mask[l] = 1; end
    // initialise both banks completely
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < DEPTH; i += WL) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_base = (AW+1)'(i);
        foreach (wr_data[l]) begin wr_data[l] = $urandom; wr_mask[l] = 1; model[b][i + l] = wr_data[l]; end
      end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      wr_en = ($urandom_range(1) == 0); wr_bank = 1'($urandom);
      wr_base = (AW+1)'($urandom_range(DEPTH - 1));
      foreach (wr_data[l]) begin
        wr_data[l] = $urandom; wr_mask[l] = ($urandom_range(3) != 0);
        if (wr_en && wr_mask[l] && wr_base + l < DEPTH) model[wr_bank][wr_base + l] = wr_data[l];
      end
      @(negedge clk);
      wr_en = 0;
      rd_en = 1; rd_bank = 1'($urandom); rd_k = 2'($urandom);
      rd_row = (t % 10 == 0) ? (AW+1)'(DEPTH / RANK - 5) : (AW+1)'($urandom_range(DEPTH / RANK - 1));
      @(negedge clk);
      rd_en = 0;
      for (int r = 0; r < RL; r++) begin
        int idx;
        fp32_t e;
        idx = (int'(rd_row) + r) * RANK + int'(rd_k);
        e = (idx < DEPTH) ? model[rd_bank][idx] : 32'd0;
        checks++;
        if (rdata[r] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d row %0d+%0d k %0d: %h expected %h", rd_bank, rd_row, r, rd_k, rdata[r], e);
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
