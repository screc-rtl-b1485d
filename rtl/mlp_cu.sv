// mlp_cu: one MLP computation unit (the published MLP core has four).
// It computes one output tile of a fully connected layer: ROWS = 8 output
// neurons x COLS = 16 batch samples, on an 8 x 16 output-stationary fp32
// PE array. Weights enter the array rows (one WMem word = the 8 weights of
// the tile's neurons for one input feature), inputs enter the array
// columns (one IOMem word = one feature of the 16 samples). After the
// whole input dimension has streamed (k_dim cycles) and the array has
// drained (ROWS+COLS-1 cycles), the array controller walks the tile rows:
// each row gets its neuron's bias (bias adder) and the ReLU (activation
// unit) and is written back to IOMem as one word at y_addr + r, for the
// `rows` valid neurons. The word formats and the sequencing are this
// design's; the array size, bias adder, ReLU and write-back to IOMem
// follow the published MLP CU.
// Timing for one tile: 1 clear + 1 bias read + k_dim feed cycles + 1 read
// latency + ROWS+COLS-1 drain + one cycle per written row (more if the
// write port is not granted). `start` is taken when idle; `done` pulses at
// the end.
module mlp_cu
  import screc_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16,
  parameter int unsigned IOAW = 15,
  parameter int unsigned WAW  = 18,
  parameter int unsigned BAW  = 12
) (
  input  logic            clk,
  input  logic            rst_n,
  // tile command
  input  logic            start,
  input  logic [15:0]     k_dim,
  input  logic [IOAW-1:0] x_addr,
  input  logic [WAW-1:0]  w_addr,
  input  logic [BAW-1:0]  b_addr,
  input  logic [IOAW-1:0] y_addr,
  input  logic [3:0]      rows,
  input  logic            relu,
  output logic            busy,
  output logic            done,
  // memory reads (through the interconnect)
  output logic            io_re,
  output logic [IOAW-1:0] io_raddr,
  input  fp32_t           io_rdata [COLS],
  output logic            w_re,
  output logic [WAW-1:0]  w_raddr,
  input  fp32_t           w_rdata [ROWS],
  output logic            b_re,
  output logic [BAW-1:0]  b_raddr,
  input  fp32_t           b_rdata [ROWS],
  // result write (through the interconnect)
  output logic            wr_valid,
  input  logic            wr_ready,
  output logic [IOAW-1:0] wr_addr,
  output fp32_t           wr_data [COLS]
);
  typedef enum logic [2:0] {S_IDLE, S_CLR, S_FEED, S_DRAIN, S_WB} state_e;
  state_e state;

  logic [15:0]     k, kd;
  logic [IOAW-1:0] xa, ya;
  logic [WAW-1:0]  wa;
  logic [3:0]      nrows, r;
  logic            relu_q, issue_q;
  logic [6:0]      dcnt;
  fp32_t           bias [ROWS];
  fp32_t           tile [ROWS][COLS];
  fp32_t           row_v [COLS];
  fp32_t           biased [COLS];

  assign busy     = (state != S_IDLE);
  assign io_re    = (state == S_FEED);
  assign w_re     = (state == S_FEED);
  assign io_raddr = xa + IOAW'(k);
  assign w_raddr  = wa + WAW'(k);
  assign b_re     = (state == S_CLR);

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .clr(state == S_CLR), .in_vld(issue_q),
    .a_col(w_rdata), .b_row(io_rdata), .acc(tile));

  always_comb row_v = tile[r[$clog2(ROWS)-1:0]];
  mlp_bias_adder #(.N(COLS)) u_bias (.x(row_v), .bias(bias[r[$clog2(ROWS)-1:0]]), .y(biased));
  mlp_relu       #(.N(COLS)) u_act  (.en(relu_q), .x(biased), .y(wr_data));

  assign wr_valid = (state == S_WB);
  assign wr_addr  = ya + IOAW'(r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; k <= '0; kd <= '0; xa <= '0; ya <= '0; wa <= '0;
      b_raddr <= '0; nrows <= '0; r <= '0; relu_q <= 1'b0; issue_q <= 1'b0; dcnt <= '0;
      for (int i = 0; i < ROWS; i++) bias[i] <= FP32_ZERO;
    end else begin
      done    <= 1'b0;
      issue_q <= (state == S_FEED);
      case (state)
        S_IDLE: if (start) begin
          kd <= k_dim; xa <= x_addr; wa <= w_addr; ya <= y_addr; b_raddr <= b_addr;
          nrows <= rows; relu_q <= relu; k <= '0;
          state <= S_CLR;
        end
        S_CLR: state <= S_FEED;
        S_FEED: begin
          if (k == 16'd0) bias <= b_rdata;          // read issued in S_CLR
          k <= k + 16'd1;
          if (k + 16'd1 == kd) begin
            dcnt  <= 7'(ROWS + COLS);
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt - 7'd1;
          if (dcnt == 7'd1) begin
            r <= '0;
            state <= S_WB;
          end
        end
        S_WB: if (wr_ready) begin
          r <= r + 4'd1;
          if (r + 4'd1 == nrows) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
