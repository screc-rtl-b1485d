// mlp_top_ctrl: top controller of the MLP core. It takes one layer
// descriptor at a time (mlp_layer_t), splits the layer into output tiles
// of 8 neurons x 16 samples and runs them on the NCU computation units in
// rounds: in latency mode a round is up to NCU neuron tiles of one batch
// tile (inputs shared), in throughput mode up to NCU batch tiles of one
// neuron tile (weights shared). CU u of a round gets the next tile in
// order, so CU 0 is always active. All CUs of a round start in the same
// cycle and the next round starts when all are idle. For a tile
// (neuron tile ot, batch tile bt) the addresses are
//   x = x_base + bt*in_dim, w = w_base + ot*in_dim, b = b_base + ot,
//   y = y_base + bt*out_dim + ot*8.
// The interconnect mode is set when the layer is accepted. `layer_done`
// pulses after the last round; stat_rounds counts rounds issued.
module mlp_top_ctrl
  import screc_pkg::*;
#(
  parameter int unsigned NCU  = 4,
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16,
  parameter int unsigned IOAW = 15,
  parameter int unsigned WAW  = 18,
  parameter int unsigned BAW  = 12
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            layer_valid,
  output logic            layer_ready,
  input  mlp_layer_t      layer,
  output logic            layer_done,
  output logic            busy,
  // interconnect controller
  output logic            set_mode,
  output mlp_mode_e       mode,
  // CU commands
  output logic            cu_start [NCU],
  output logic [15:0]     cu_k_dim,
  output logic [IOAW-1:0] cu_x_addr [NCU],
  output logic [WAW-1:0]  cu_w_addr [NCU],
  output logic [BAW-1:0]  cu_b_addr [NCU],
  output logic [IOAW-1:0] cu_y_addr [NCU],
  output logic [3:0]      cu_rows   [NCU],
  output logic            cu_relu,
  input  logic            cu_busy   [NCU],
  output logic [31:0]     stat_rounds
);
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;
  state_e state;
  mlp_layer_t L;
  logic [15:0] ot_n, bt_n, outer, inner;   // outer/inner tile loops
  logic [15:0] outer_n, inner_n;
  logic        all_idle;

  assign layer_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign set_mode    = layer_valid && layer_ready;
  assign mode        = layer.mode;
  assign cu_k_dim    = L.in_dim;
  assign cu_relu     = L.relu;

  always_comb begin
    all_idle = 1'b1;
    for (int u = 0; u < NCU; u++) if (cu_busy[u]) all_idle = 1'b0;
  end

  // tile of CU u in the current round
  always_comb begin
    for (int u = 0; u < NCU; u++) begin
      logic [15:0] ot, bt, left;
      if (L.mode == MODE_LATENCY) begin
        bt = outer;
        ot = inner + 16'(u);
        cu_start[u] = (state == S_ISSUE) && (ot < ot_n);
      end else begin
        ot = outer;
        bt = inner + 16'(u);
        cu_start[u] = (state == S_ISSUE) && (bt < bt_n);
      end
      left = L.out_dim - ot * 16'(ROWS);
      cu_rows[u]   = (left >= 16'(ROWS)) ? 4'(ROWS) : left[3:0];
      cu_x_addr[u] = IOAW'(L.x_base + 20'(bt) * 20'(L.in_dim));
      cu_w_addr[u] = WAW'(L.w_base + 20'(ot) * 20'(L.in_dim));
      cu_b_addr[u] = BAW'(L.b_base + 20'(ot));
      cu_y_addr[u] = IOAW'(L.y_base + 20'(bt) * 20'(L.out_dim) + 20'(ot) * 20'(ROWS));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; L <= '0; layer_done <= 1'b0;
      ot_n <= '0; bt_n <= '0; outer <= '0; inner <= '0; outer_n <= '0; inner_n <= '0;
      stat_rounds <= '0;
    end else begin
      layer_done <= 1'b0;
      case (state)
        S_IDLE: if (layer_valid) begin
          logic [15:0] o, b;
          o = (layer.out_dim + 16'(ROWS - 1)) / 16'(ROWS);
          b = (layer.batch + 16'(COLS - 1)) / 16'(COLS);
          L <= layer;
          ot_n <= o;
          bt_n <= b;
          outer <= '0;
          inner <= '0;
          outer_n <= (layer.mode == MODE_LATENCY) ? b : o;
          inner_n <= (layer.mode == MODE_LATENCY) ? o : b;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          stat_rounds <= stat_rounds + 32'd1;
          state <= S_WAIT;
        end
        S_WAIT: if (all_idle) begin
          if (inner + 16'(NCU) < inner_n) begin
            inner <= inner + 16'(NCU);
            state <= S_ISSUE;
          end else if (outer + 16'd1 < outer_n) begin
            inner <= '0;
            outer <= outer + 16'd1;
            state <= S_ISSUE;
          end else begin
            layer_done <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
