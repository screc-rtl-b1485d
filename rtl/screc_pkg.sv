// screc_pkg: types and constants shared by the EMB core (tensor-train
// embedding reconstruction and multi-tier pooling) and the MLP core.
// Data are IEEE-754 single precision words, as in the accelerator's 32-bit
// floating-point PEs. The remapped embedding address layout
// {device_id[1:0], emb_idx[29:0]} and the device codes 0 = FPGA DRAM,
// 1 = BRAM (tensor-train format), 2 = SSD follow the published design;
// code 3 is unused and treated as an error by the EMB top controller.
package screc_pkg;

  typedef logic [31:0] fp32_t;

  // Device that holds an embedding row after three-level sharding.
  typedef enum logic [1:0] {
    DEV_DRAM = 2'd0,
    DEV_BRAM = 2'd1,
    DEV_SSD  = 2'd2,
    DEV_RSVD = 2'd3
  } dev_id_e;

  // 32-bit remapped address returned by the host remapping table.
  typedef struct packed {
    dev_id_e     device_id;
    logic [29:0] emb_idx;
  } remap_addr_t;

  // Data distribution of the MLP core interconnect.
  typedef enum logic {
    MODE_LATENCY    = 1'b0,  // inputs broadcast, weights split across CUs
    MODE_THROUGHPUT = 1'b1   // inputs split across CUs, weights broadcast
  } mlp_mode_e;

  // Target memory of an MLP DMA burst.
  typedef enum logic [1:0] {
    MEM_IO = 2'd0,
    MEM_W  = 2'd1,
    MEM_B  = 2'd2
  } mlp_mem_e;

  // Target memory of an EMB DMA tensor-train load burst.
  typedef enum logic {
    TT_LOAD_A = 1'b0,
    TT_LOAD_C = 1'b1
  } tt_load_e;

  // One MLP layer as issued to the MLP core: Y = act(W X + b) for a batch.
  // Activations are stored in IOMem as one word per (16-sample batch
  // tile, feature); weights in WMem as one word per (8-neuron tile, input
  // feature); biases in BMem as one word per 8-neuron tile.
  typedef struct packed {
    logic [15:0] in_dim;
    logic [15:0] out_dim;
    logic [15:0] batch;
    logic [19:0] x_base;
    logic [19:0] y_base;
    logic [19:0] w_base;
    logic [19:0] b_base;
    logic        relu;
    mlp_mode_e   mode;
  } mlp_layer_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;

  // Unsigned integer to fp32 (round to nearest even), used for the
  // pooling count in the average-pooling divider.
  function automatic fp32_t u2f(input logic [31:0] v);
    logic [31:0] m;
    int unsigned lz;
    logic [7:0]  e;
    logic [24:0] mant;
    logic        g, s;
    if (v == 0) return FP32_ZERO;
    lz = 0;
    for (int i = 31; i >= 0; i--) begin
      if (v[i]) break;
      lz++;
    end
    m = v << lz;                       // leading one at bit 31
    e = 8'(127 + 31 - lz);
    mant = {1'b0, m[31:8]};
    g = m[7];
    s = |m[6:0];
    if (g && (s || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e = e + 8'd1;
    end
    return {1'b0, e, mant[22:0]};
  endfunction

endpackage
