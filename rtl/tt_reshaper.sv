// tt_reshaper: drains one finished output tile of the TT PE array.
// Step k of the TT-core chain produces T_k (M x N), which the next step
// needs reshaped to (M*N/RANK) x RANK; the last step produces the
// embedding vector, T_K flattened. Both are the row-major flat order of
// T_k, so the reshaper only has to write every tile row r (global row
// m = m0 + r) at flat index m*N + n0, one row of COLS values per cycle,
// masking columns n0 + c >= N:
//  - intermediate steps (last = 0): into TT_BMem bank wr_bank;
//  - last step (last = 1): as a vector beat to the TT pool of the vector
//    pooling unit (out_valid/out_ready, base index, COLS values, mask);
//    out_last marks the final beat of the vector when final_tile is set.
// Rows m >= M are skipped. `start` (one cycle, idle only) latches the tile
// description; rows are issued on consecutive cycles (stalled by
// out_ready on the last step) and `done` pulses after the last row.
// The tile values are read live from the array, which holds them until
// its next clear. The row-major write order follows the reshape in the
// published algorithm; the one-row-per-cycle rate is this design's choice.
module tt_reshaper
  import screc_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 32,
  parameter int unsigned IW   = 16     // width of tile coordinates
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] m0,
  input  logic [IW-1:0] n0,
  input  logic [IW-1:0] m_rows,       // M
  input  logic [IW-1:0] n_cols,       // N
  input  logic          last,
  input  logic          final_tile,
  input  logic          bank,
  input  fp32_t         tile [ROWS][COLS],
  output logic          busy,
  output logic          done,
  // TT_BMem write port
  output logic          wr_en,
  output logic          wr_bank,
  output logic [IW-1:0] wr_base,
  output fp32_t         wr_data [COLS],
  output logic          wr_mask [COLS],
  // vector beats to the vector pooling unit
  output logic          out_valid,
  input  logic          out_ready,
  output logic [IW-1:0] out_base,
  output fp32_t         out_data [COLS],
  output logic          out_mask [COLS],
  output logic          out_last
);
  logic [IW-1:0] m0_q, n0_q, m_q, n_q;
  logic          last_q, final_q, bank_q;
  logic [$clog2(ROWS):0] r;
  logic [IW-1:0] m_cur;
  logic          row_ok, is_last_row, fire;

  always_comb begin
    m_cur       = m0_q + IW'(r);
    row_ok      = busy && (m_cur < m_q) && (r < ROWS);
    is_last_row = (r == ROWS - 1) || (m_cur + 1 >= m_q);
    fire        = row_ok && (!last_q || out_ready);
    for (int c = 0; c < COLS; c++) begin
      wr_data[c]  = tile[r[$clog2(ROWS)-1:0]][c];
      out_data[c] = tile[r[$clog2(ROWS)-1:0]][c];
      wr_mask[c]  = (n0_q + IW'(c)) < n_q;
      out_mask[c] = wr_mask[c];
    end
    wr_base   = m_cur * n_q + n0_q;
    out_base  = wr_base;
    wr_bank   = bank_q;
    wr_en     = row_ok && !last_q;
    out_valid = row_ok && last_q;
    out_last  = out_valid && final_q && is_last_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; r <= '0;
      m0_q <= '0; n0_q <= '0; m_q <= '0; n_q <= '0;
      last_q <= 1'b0; final_q <= 1'b0; bank_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; r <= '0;
          m0_q <= m0; n0_q <= n0; m_q <= m_rows; n_q <= n_cols;
          last_q <= last; final_q <= final_tile; bank_q <= bank;
        end
      end else if (!row_ok) begin
        busy <= 1'b0; done <= 1'b1;
      end else if (fire) begin
        r <= r + 1'b1;
        if (is_last_row) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
