// mlp_interconnect: interconnect and interconnect controller of the MLP
// core. It connects the NCU computation units to the shared memory in one
// of the two published data distributions:
//  - MODE_LATENCY: one IOMem read (issued by CU 0) is broadcast to every
//    CU, while each CU reads its own weights: the CUs work on different
//    neuron tiles of the same batch tile;
//  - MODE_THROUGHPUT: each CU reads its own IOMem word, while one WMem read
//    (issued by CU 0) is broadcast: the CUs work on different batch tiles
//    with the same neurons.
// The broadcast port is driven by CU 0 because the top controller always
// fills CU 0 first and starts all CUs of a round together, so they issue
// identical broadcast addresses in the same cycles (checked by an
// assertion). Unused memory ports stay idle. Bias reads are per CU.
// Results are written back through one IOMem write port granted
// round-robin among the requesting CUs (a choice of this design).
// `mode` is latched on `set_mode` (the interconnect controller).
module mlp_interconnect
  import screc_pkg::*;
#(
  parameter int unsigned NCU  = 4,
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 16,
  parameter int unsigned IOAW = 15,
  parameter int unsigned WAW  = 18
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            set_mode,
  input  mlp_mode_e       mode_in,
  output mlp_mode_e       mode,
  // CU side
  input  logic            cu_io_re    [NCU],
  input  logic [IOAW-1:0] cu_io_raddr [NCU],
  output fp32_t           cu_io_rdata [NCU][COLS],
  input  logic            cu_w_re     [NCU],
  input  logic [WAW-1:0]  cu_w_raddr  [NCU],
  output fp32_t           cu_w_rdata  [NCU][ROWS],
  input  logic            cu_wr_valid [NCU],
  output logic            cu_wr_ready [NCU],
  input  logic [IOAW-1:0] cu_wr_addr  [NCU],
  input  fp32_t           cu_wr_data  [NCU][COLS],
  // memory side
  output logic            io_re    [NCU],
  output logic [IOAW-1:0] io_raddr [NCU],
  input  fp32_t           io_rdata [NCU][COLS],
  output logic            w_re     [NCU],
  output logic [WAW-1:0]  w_raddr  [NCU],
  input  fp32_t           w_rdata  [NCU][ROWS],
  output logic            io_we,
  output logic [IOAW-1:0] io_waddr,
  output fp32_t           io_wdata [COLS]
);
  localparam int unsigned UW = (NCU > 1) ? $clog2(NCU) : 1;
  logic [UW-1:0] rr, gnt;
  logic          any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode <= MODE_LATENCY;
    else if (set_mode) mode <= mode_in;
  end

  always_comb begin
    for (int u = 0; u < NCU; u++) begin
      if (mode == MODE_LATENCY) begin
        io_re[u]    = (u == 0) ? cu_io_re[0] : 1'b0;
        io_raddr[u] = cu_io_raddr[0];
        w_re[u]     = cu_w_re[u];
        w_raddr[u]  = cu_w_raddr[u];
        cu_io_rdata[u] = io_rdata[0];
        cu_w_rdata[u]  = w_rdata[u];
      end else begin
        io_re[u]    = cu_io_re[u];
        io_raddr[u] = cu_io_raddr[u];
        w_re[u]     = (u == 0) ? cu_w_re[0] : 1'b0;
        w_raddr[u]  = cu_w_raddr[0];
        cu_io_rdata[u] = io_rdata[u];
        cu_w_rdata[u]  = w_rdata[0];
      end
    end
  end

  // round-robin write-back arbiter
  always_comb begin
    any = 1'b0;
    gnt = rr;
    for (int i = 0; i < NCU; i++) begin
      logic [UW-1:0] c;
      c = UW'((int'(rr) + i) % NCU);
      if (!any && cu_wr_valid[c]) begin
        any = 1'b1;
        gnt = c;
      end
    end
    for (int u = 0; u < NCU; u++) cu_wr_ready[u] = any && (gnt == UW'(u));
    io_we    = any;
    io_waddr = cu_wr_addr[gnt];
    io_wdata = cu_wr_data[gnt];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (any) rr <= UW'((int'(gnt) + 1) % NCU);
  end

  // broadcast reads need every active CU on the same address
  for (genvar u = 1; u < NCU; u++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (mode == MODE_LATENCY && cu_io_re[u]) |-> (cu_io_re[0] && cu_io_raddr[u] == cu_io_raddr[0]));
    assert property (@(posedge clk) disable iff (!rst_n)
      (mode == MODE_THROUGHPUT && cu_w_re[u]) |-> (cu_w_re[0] && cu_w_raddr[u] == cu_w_raddr[0]));
  end
endmodule
