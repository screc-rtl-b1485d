// post_pool: post-pooling stage of the vector pooling unit. After a bag
// (all lookups of one sparse feature of one sample) has been pooled per
// device, it adds the DRAM, SSD and TT partial sums element-wise
// ((dram + ssd) + tt) and, in average mode, divides by the total number
// of pooled vectors with LANES parallel fp32 dividers (the published
// post-pooling unit produces the average with an FP divider); with
// avg = 0 the plain sum is returned. An empty bag gives a zero vector
// (this design's choice). The result leaves as beats of LANES values:
// out_idx is the element index of lane 0, out_last flags the final beat of
// the vector, ordinary valid/ready flow control.
// Timing per beat: 1 add cycle, then up to 28 divider cycles in average mode
// (every lane's quotient is collected as its divider finishes),
// then the output beat. `start` is taken only while idle; `done` pulses
// after the last beat is accepted.
module post_pool
  import screc_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned DIM   = 512,
  parameter int unsigned IW    = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW-1:0] dim,
  input  logic          avg,
  input  fp32_t         acc_dram [DIM],
  input  fp32_t         acc_ssd  [DIM],
  input  fp32_t         acc_tt   [DIM],
  input  logic [15:0]   cnt_dram,
  input  logic [15:0]   cnt_ssd,
  input  logic [15:0]   cnt_tt,
  output logic          busy,
  output logic          done,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [IW-1:0] out_idx,
  output fp32_t         out_data [LANES],
  output logic          out_last
);
  typedef enum logic [1:0] {S_IDLE, S_ADD, S_DIV, S_OUT} state_e;
  state_e state;

  logic [IW-1:0] base, dim_q;
  logic          avg_q;
  fp32_t         cnt_f;
  logic [17:0]   cnt_tot;
  fp32_t         s1 [LANES];
  fp32_t         s2 [LANES];
  fp32_t         q  [LANES];
  fp32_t         res [LANES];
  logic          div_start;
  logic [LANES-1:0] div_busy, div_done, div_pend;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [IW:0] idx;
    fp32_t d, s, t;
    assign idx = {1'b0, base} + (IW+1)'(l);
    assign d = (idx < DIM) ? acc_dram[idx[$clog2(DIM)-1:0]] : FP32_ZERO;
    assign s = (idx < DIM) ? acc_ssd [idx[$clog2(DIM)-1:0]] : FP32_ZERO;
    assign t = (idx < DIM) ? acc_tt  [idx[$clog2(DIM)-1:0]] : FP32_ZERO;
    fp32_add u_a1 (.a(d),     .b(s), .y(s1[l]));
    fp32_add u_a2 (.a(s1[l]), .b(t), .y(s2[l]));
    fp32_div u_div (.clk, .rst_n, .start(div_start), .a(s2[l]), .b(cnt_f),
                    .busy(div_busy[l]), .done(div_done[l]), .y(q[l]));
  end

  assign cnt_tot   = 18'(cnt_dram) + 18'(cnt_ssd) + 18'(cnt_tt);
  assign cnt_f     = u2f(32'(cnt_tot));
  assign div_start = (state == S_ADD) && avg_q && (cnt_tot != 0);
  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUT);
  assign out_idx   = base;
  assign out_data  = res;
  assign out_last  = (state == S_OUT) && ({1'b0, base} + (IW+1)'(LANES) >= {1'b0, dim_q});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base <= '0; dim_q <= '0; avg_q <= 1'b0; done <= 1'b0; div_pend <= '0;
      for (int l = 0; l < LANES; l++) res[l] <= FP32_ZERO;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base <= '0; dim_q <= dim; avg_q <= avg;
          state <= S_ADD;
        end
        S_ADD: begin
          if (avg_q && cnt_tot == 0) begin
            for (int l = 0; l < LANES; l++) res[l] <= FP32_ZERO;
            state <= S_OUT;
          end else if (avg_q) begin
            div_pend <= '1;
            state    <= S_DIV;
          end else begin
            res   <= s2;
            state <= S_OUT;
          end
        end
        // lanes with special operands finish early: keep each quotient
        // as it arrives and leave once every lane has delivered
        S_DIV: begin
          for (int l = 0; l < LANES; l++) if (div_done[l]) res[l] <= q[l];
          div_pend <= div_pend & ~div_done;
          if ((div_pend & ~div_done) == '0) state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (out_last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            base  <= base + IW'(LANES);
            state <= S_ADD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
