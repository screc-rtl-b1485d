// tb_pe_array: random fp32 matrix tiles through the default 16 x 32
// output-stationary array. Checks every element of C = A*B against a
// reference accumulated in the same order, and that the last element
// becomes final exactly ROWS+COLS-1 cycles after the last step.
module tb_pe_array;
  import tb_fp_pkg::*;
  localparam int ROWS = 16, COLS = 32;
  logic clk = 0, rst_n = 0, clr = 0, in_vld = 0;
  logic [31:0] a_col [ROWS];
  logic [31:0] b_row [COLS];
  logic [31:0] acc [ROWS][COLS];
  logic [31:0] A [ROWS][64];
  logic [31:0] B [64][COLS];
  logic [31:0] C [ROWS][COLS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .clr, .in_vld, .a_col, .b_row, .acc);

  initial begin
    foreach (a_col[i]) a_col[i] = 0;
    foreach (b_row[i]) b_row[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int K;
      K = (t == 0) ? 1 : 1 + $urandom_range(40);
      foreach (A[r, k]) A[r][k] = rand_fp();
      foreach (B[k, c]) B[k][c] = rand_fp();
      foreach (C[r, c]) begin
        C[r][c] = 0;
        for (int k = 0; k < K; k++) C[r][c] = ref_add(C[r][c], ref_mul(A[r][k], B[k][c]));
      end
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int k = 0; k < K; k++) begin
        in_vld = 1;
        for (int r = 0; r < ROWS; r++) a_col[r] = A[r][k];
        for (int c = 0; c < COLS; c++) b_row[c] = B[k][c];
        @(negedge clk);
      end
      in_vld = 0;
      // one cycle before the drain ends the corner PE must not be final yet
      repeat (ROWS + COLS - 3) @(negedge clk);
      checks++;
      if (acc[ROWS-1][COLS-1] === C[ROWS-1][COLS-1] && K > 1) begin
        failures++;
        $display("FAIL corner PE final too early");
      end
      @(negedge clk);
      foreach (C[r, c]) begin
        checks++;
        if (acc[r][c] !== C[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d]=%h expected %h (K=%0d)", r, c, acc[r][c], C[r][c], K);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
