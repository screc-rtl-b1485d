// pe_array: ROWS x COLS output-stationary systolic array of fp32 PEs.
// It computes one output tile C = A * B, where the inner dimension is
// streamed in one step per cycle: in the cycle with in_vld set for step k
// the caller presents column k of A on a_col (one value per array row) and
// row k of B on b_row (one value per array column). Operand A flows
// rightward along the rows, operand B downward along the columns. The
// array skews the inputs itself (row r delayed by r cycles, column c by c
// cycles), so PE(r,c) sees A[r][k] and B[k][c] together and accumulates
// C[r][c] in place. `clr` (one cycle, before the first step) zeroes all
// partial sums. The last product lands ROWS+COLS-1 cycles after the last
// step was presented (DRAIN); `acc` then holds the whole tile until the
// next `clr`. The TT computation unit uses 16 x 32 and each MLP
// computation unit 8 x 16, as in the published design.
module pe_array
  import screc_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  in_vld,
  input  fp32_t a_col [ROWS],
  input  fp32_t b_row [COLS],
  output fp32_t acc   [ROWS][COLS]
);

  // skewed edge inputs
  fp32_t a_edge [ROWS];
  logic  v_edge [ROWS];
  fp32_t b_edge [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_askew
    if (r == 0) begin : g_none
      assign a_edge[r] = a_col[r];
      assign v_edge[r] = in_vld;
    end else begin : g_dly
      fp32_t a_q [r];
      logic  v_q [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            a_q[i] <= FP32_ZERO;
            v_q[i] <= 1'b0;
          end
        end else begin
          a_q[0] <= a_col[r];
          v_q[0] <= in_vld;
          for (int i = 1; i < r; i++) begin
            a_q[i] <= a_q[i-1];
            v_q[i] <= v_q[i-1];
          end
        end
      end
      assign a_edge[r] = a_q[r-1];
      assign v_edge[r] = v_q[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bskew
    if (c == 0) begin : g_none
      assign b_edge[c] = b_row[c];
    end else begin : g_dly
      fp32_t b_q [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) b_q[i] <= FP32_ZERO;
        end else begin
          b_q[0] <= b_row[c];
          for (int i = 1; i < c; i++) b_q[i] <= b_q[i-1];
        end
      end
      assign b_edge[c] = b_q[c-1];
    end
  end

  // PE mesh: a/v travel right, b travels down
  fp32_t a_h [ROWS][COLS+1];
  logic  v_h [ROWS][COLS+1];
  fp32_t b_v [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = a_edge[r];
    assign v_h[r][0] = v_edge[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_col
    assign b_v[0][c] = b_edge[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      pe u_pe (
        .clk, .rst_n, .clr,
        .a_vld    (v_h[r][c]),
        .a_in     (a_h[r][c]),
        .b_in     (b_v[r][c]),
        .a_vld_out(v_h[r][c+1]),
        .a_out    (a_h[r][c+1]),
        .b_out    (b_v[r+1][c]),
        .acc      (acc[r][c])
      );
    end
  end
endmodule
