// tt_array_ctrl: the array controller of the TT computation unit. For one
// embedding row index it runs the TT-core matrix-multiplication chain
//   T_1 = U_1[i_1] * U_2[i_2],  T_s = R_s * U_{s+1}[i_{s+1}],
// where U_k[i] is TT-core k sliced at index i and unfolded, and R_s is
// T_{s-1} reshaped to RANK columns (published TT-core multiplication
// sequence). Sequence per request:
//  1. split the row index into TT indices i_1..i_K (mixed radix with the
//     row factors cfg_i; i_K is the least significant digit) with a
//     restoring divider, one quotient bit per cycle;
//  2. for each step s = 0..TT_DIM-2 the product has M = J_1*..*J_{s+1}
//     rows and N = J_{s+2}*R_{s+2} columns (R = RANK, 1 for the last
//     core); it is cut into ROWS x COLS output tiles, and each tile is one
//     clear, RANK feed cycles (inner dimension = TT rank), a drain of
//     ROWS+COLS-1 cycles and a reshaper pass.
// Operand A comes from TT_AMem in step 0 and from TT_BMem (bank s mod 2)
// afterwards; operand B always comes from TT_CMem. The reshaper writes
// bank (s+1) mod 2, or streams the last step to the vector pooling unit.
// Memory layout expected in TT_AMem (word = ROWS lanes):
//   addr = i_1*RANK*MT + k*MT + mt, lane r = G_1[i_1][mt*ROWS + r][k],
//   MT = ceil(J_1/ROWS);
// in TT_CMem for core c >= 1 (word = COLS lanes), N_c = J_c*R_c:
//   addr = cfg_cbase[c] + i_c*RANK*NT + r*NT + nt,
//   lane l = U_c[i_c][r][nt*COLS + l] = G_c[r][i_c][j][r'] with
//   nt*COLS + l = j*R_c + r', NT = ceil(N_c/COLS).
// These layouts, the divider and the strictly sequential tile order are
// choices of this design. req_ready is high only when idle; `done` pulses
// when the reshaper has finished the last tile.
module tt_array_ctrl
  import screc_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 32,
  parameter int unsigned RANK   = 4,
  parameter int unsigned TT_DIM = 3,
  parameter int unsigned IW     = 16,
  parameter int unsigned AAW    = 11,
  parameter int unsigned CAW    = 16,
  parameter int unsigned BAW    = 11
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [IW-1:0]  cfg_i     [TT_DIM],
  input  logic [IW-1:0]  cfg_j     [TT_DIM],
  input  logic [CAW-1:0] cfg_cbase [TT_DIM],
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [29:0]    req_row,
  output logic           busy,
  output logic           done,
  // PE array
  output logic           arr_clr,
  output logic           arr_issue,
  output logic           a_from_bmem,
  // memories
  output logic           amem_re,
  output logic [AAW-1:0] amem_raddr,
  output logic           cmem_re,
  output logic [CAW-1:0] cmem_raddr,
  output logic           bmem_re,
  output logic           bmem_rd_bank,
  output logic [BAW:0]   bmem_rd_row,
  output logic [$clog2(RANK)-1:0] bmem_rd_k,
  // reshaper
  output logic           rs_start,
  output logic [IW-1:0]  rs_m0,
  output logic [IW-1:0]  rs_n0,
  output logic [IW-1:0]  rs_m,
  output logic [IW-1:0]  rs_n,
  output logic           rs_last,
  output logic           rs_final,
  output logic           rs_bank,
  input  logic           rs_done
);
  typedef enum logic [2:0] {S_IDLE, S_DIV, S_SETUP, S_CLR, S_FEED, S_DRAIN, S_RESHAPE, S_WAITRS} state_e;
  state_e state;

  localparam int unsigned SW = $clog2(TT_DIM);
  localparam int unsigned KW = $clog2(RANK);

  logic [IW-1:0] idx [TT_DIM];
  logic [29:0]   num, quo;
  logic [IW:0]   rem;
  logic [4:0]    bitc;
  logic [SW-1:0] dig;          // digit being extracted
  logic [SW-1:0] s;            // step
  logic [IW-1:0] m_rows, n_cols, mt, nt, mt_n, nt_n;
  logic [KW:0]   kk;
  logic [6:0]    dcnt;
  logic [CAW-1:0] cb;          // TT_CMem base of the sliced core of this step
  logic          last_step;

  // restoring division step
  logic [IW:0]   rem_sh;
  always_comb rem_sh = {rem[IW-1:0], num[29]};

  assign last_step = (s == SW'(TT_DIM - 2));
  assign req_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign arr_clr   = (state == S_CLR);
  assign arr_issue = (state == S_FEED);
  assign a_from_bmem = (s != '0);
  assign amem_re   = (state == S_FEED) && (s == '0);
  assign bmem_re   = (state == S_FEED) && (s != '0);
  assign cmem_re   = (state == S_FEED);
  assign amem_raddr = AAW'(idx[0] * IW'(RANK) * ((cfg_j[0] + IW'(ROWS - 1)) / IW'(ROWS))
                           + IW'(kk) * ((cfg_j[0] + IW'(ROWS - 1)) / IW'(ROWS)) + mt);
  assign cmem_raddr = CAW'(cb + CAW'(kk) * CAW'(nt_n) + CAW'(nt));
  assign bmem_rd_bank = s[0];
  assign bmem_rd_row  = (BAW+1)'(mt * IW'(ROWS));
  assign bmem_rd_k    = kk[KW-1:0];
  assign rs_start = (state == S_RESHAPE);
  assign rs_m0    = mt * IW'(ROWS);
  assign rs_n0    = nt * IW'(COLS);
  assign rs_m     = m_rows;
  assign rs_n     = n_cols;
  assign rs_last  = last_step;
  assign rs_final = last_step && (mt == mt_n - 1) && (nt == nt_n - 1);
  assign rs_bank  = ~s[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      for (int k = 0; k < TT_DIM; k++) idx[k] <= '0;
      num <= '0; quo <= '0; rem <= '0; bitc <= '0; dig <= '0; s <= '0;
      m_rows <= '0; n_cols <= '0; mt <= '0; nt <= '0; mt_n <= '0; nt_n <= '0;
      kk <= '0; dcnt <= '0; cb <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          num  <= req_row;
          quo  <= '0;
          rem  <= '0;
          bitc <= '0;
          dig  <= SW'(TT_DIM - 1);
          state <= S_DIV;
        end
        S_DIV: begin
          // one quotient bit of num / cfg_i[dig]
          logic [IW:0] r_n;
          logic        qb;
          qb  = (rem_sh >= {1'b0, cfg_i[dig]});
          r_n = qb ? rem_sh - {1'b0, cfg_i[dig]} : rem_sh;
          rem <= r_n;
          num <= {num[28:0], 1'b0};
          quo <= {quo[28:0], qb};
          bitc <= bitc + 5'd1;
          if (bitc == 5'd29) begin
            idx[dig] <= r_n[IW-1:0];
            num  <= {quo[28:0], qb};
            quo  <= '0;
            rem  <= '0;
            bitc <= '0;
            if (dig == SW'(1)) begin
              idx[0] <= IW'({quo[28:0], qb});
              s      <= '0;
              m_rows <= cfg_j[0];
              state  <= S_SETUP;
            end else begin
              dig <= dig - SW'(1);
            end
          end
        end
        S_SETUP: begin
          logic [IW-1:0] n_new;
          n_new = cfg_j[s + SW'(1)] * ((s == SW'(TT_DIM - 2)) ? IW'(1) : IW'(RANK));
          n_cols <= n_new;
          mt_n   <= (m_rows + IW'(ROWS - 1)) / IW'(ROWS);
          nt_n   <= (n_new + IW'(COLS - 1)) / IW'(COLS);
          cb     <= CAW'(cfg_cbase[s + SW'(1)]
                   + CAW'(idx[s + SW'(1)]) * CAW'(RANK) * CAW'((n_new + IW'(COLS - 1)) / IW'(COLS)));
          mt <= '0;
          nt <= '0;
          state <= S_CLR;
        end
        S_CLR: begin
          kk <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          kk <= kk + 1'b1;
          if (kk == (KW+1)'(RANK - 1)) begin
            dcnt  <= 7'(ROWS + COLS - 1);
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt - 7'd1;
          if (dcnt == 7'd1) state <= S_RESHAPE;
        end
        S_RESHAPE: state <= S_WAITRS;
        S_WAITRS: if (rs_done) begin
          if (nt + 1 < nt_n) begin
            nt <= nt + 1'b1;
            state <= S_CLR;
          end else if (mt + 1 < mt_n) begin
            nt <= '0;
            mt <= mt + 1'b1;
            state <= S_CLR;
          end else if (!last_step) begin
            s      <= s + SW'(1);
            m_rows <= m_rows * cfg_j[s + SW'(1)];
            state  <= S_SETUP;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
