// fp32_div: sequential IEEE-754 single-precision divider, used by the
// post-pooling stage to turn a pooled sum into an average. The published
// design uses a vendor FP divider; this one is a plain restoring divider
// producing one quotient bit per cycle.
// Timing: a one-cycle `start` pulse latches a (dividend) and b (divisor);
// `done` pulses with the result on `y` 28 cycles later (special operands:
// 1 cycle). `busy` is high in between; `start` is ignored while busy.
// Rounding is to nearest, ties to even; subnormals are flushed to zero.
module fp32_div
  import screc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp32_t a,
  input  fp32_t b,
  output logic  busy,
  output logic  done,
  output fp32_t y
);
  typedef enum logic [1:0] {S_IDLE, S_ITER, S_ROUND} state_e;
  state_e state;
  logic        sy;
  logic signed [10:0] e;
  logic [24:0] rem;            // partial remainder
  logic [23:0] dvs;            // divisor significand
  logic [25:0] q;              // 24 significand bits + guard + round
  logic [4:0]  cnt;

  // operand classification of the inputs at start
  logic [7:0]  ea, eb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [23:0] ma, mb;
  always_comb begin
    ea = a[30:23];
    eb = b[30:23];
    a_zero = (ea == 0);
    b_zero = (eb == 0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 0);
    a_nan  = (ea == 8'hff) && (a[22:0] != 0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 0);
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
  end

  // rounding of the finished quotient
  logic [24:0] mant_r;
  logic signed [10:0] e_r;
  always_comb begin
    mant_r = {1'b0, q[25:2]};
    e_r = e;
    if (q[1] && (q[0] || (rem != 0) || mant_r[0])) mant_r = mant_r + 25'd1;
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e_r = e_r + 11'sd1;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      y     <= '0;
      sy    <= 1'b0;
      e     <= '0;
      rem   <= '0;
      dvs   <= '0;
      q     <= '0;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          sy <= a[31] ^ b[31];
          if (a_nan || b_nan || (a_zero && b_zero) || (a_inf && b_inf)) begin
            y <= 32'h7fc0_0000; done <= 1'b1;
          end else if (a_inf || b_zero) begin
            y <= {a[31] ^ b[31], 8'hff, 23'd0}; done <= 1'b1;
          end else if (a_zero || b_inf) begin
            y <= {a[31] ^ b[31], 31'd0}; done <= 1'b1;
          end else begin
            // pre-normalise so that the quotient lies in [1, 2)
            if (ma < mb) begin
              rem <= {ma, 1'b0};
              e   <= 11'(signed'({3'b0, ea})) - 11'(signed'({3'b0, eb})) + 11'sd126;
            end else begin
              rem <= {1'b0, ma};
              e   <= 11'(signed'({3'b0, ea})) - 11'(signed'({3'b0, eb})) + 11'sd127;
            end
            dvs   <= mb;
            q     <= '0;
            cnt   <= 5'd0;
            state <= S_ITER;
          end
        end
        S_ITER: begin
          if (rem >= {1'b0, dvs}) begin
            rem <= (rem - {1'b0, dvs}) << 1;
            q   <= {q[24:0], 1'b1};
          end else begin
            rem <= rem << 1;
            q   <= {q[24:0], 1'b0};
          end
          cnt <= cnt + 5'd1;
          if (cnt == 5'd25) state <= S_ROUND;
        end
        S_ROUND: begin
          if (e_r >= 11'sd255)    y <= {sy, 8'hff, 23'd0};
          else if (e_r <= 11'sd0) y <= {sy, 31'd0};
          else                    y <= {sy, e_r[7:0], mant_r[22:0]};
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
