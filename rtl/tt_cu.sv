// tt_cu: TT computation unit of the EMB core. It rebuilds a whole
// approximated embedding vector E(i,:) of a table stored in tensor-train
// (TT) format from its TT-cores, E(i,:) = G_1(:,i_1,:,:) G_2(:,i_2,:,:) ...
// G_K(:,i_K,:,:), as a chain of small matrix products on a ROWS x COLS
// (16 x 32) output-stationary fp32 PE array, with TT_AMem, the dual-bank
// TT_BMem and TT_CMem around it and a reshaper behind it (structure of the
// published EMB core). TT-core slices are unfolded into matrices when
// they are loaded (initialisation); at run time only the chain runs.
// Interface:
//  - ld_*: initialisation writes of one word into TT_AMem (ld_sel =
//    TT_LOAD_A, lanes 0..ROWS-1 used) or TT_CMem (TT_LOAD_C), in the
//    layouts described in tt_array_ctrl;
//  - cfg_i / cfg_j: TT row factors I_k and embedding-dimension factors J_k
//    of the table; cfg_cbase: TT_CMem word address of each core (entry 0
//    unused);
//  - req_valid/req_ready/req_row: one embedding row index per request,
//    accepted only while idle;
//  - out_*: the vector, as beats of up to COLS values at flat index
//    out_base (valid lanes in out_mask), out_last on the final beat.
// TT_DIM (number of TT-cores, 3) and RANK (TT-rank, 4) are the published
// values; the memory sizes are choices of this design.
module tt_cu
  import screc_pkg::*;
#(
  parameter int unsigned ROWS       = 16,
  parameter int unsigned COLS       = 32,
  parameter int unsigned RANK       = 4,
  parameter int unsigned TT_DIM     = 3,
  parameter int unsigned IW         = 16,
  parameter int unsigned AMEM_DEPTH = 2048,
  parameter int unsigned CMEM_DEPTH = 36864,
  parameter int unsigned BMEM_DEPTH = 2048,
  localparam int unsigned AAW = $clog2(AMEM_DEPTH),
  localparam int unsigned CAW = $clog2(CMEM_DEPTH),
  localparam int unsigned BAW = $clog2(BMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // initialisation load
  input  logic           ld_we,
  input  tt_load_e       ld_sel,
  input  logic [CAW-1:0] ld_addr,
  input  fp32_t          ld_data [COLS],
  // table configuration
  input  logic [IW-1:0]  cfg_i     [TT_DIM],
  input  logic [IW-1:0]  cfg_j     [TT_DIM],
  input  logic [CAW-1:0] cfg_cbase [TT_DIM],
  // lookups
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [29:0]    req_row,
  output logic           busy,
  // vector beats
  output logic           out_valid,
  input  logic           out_ready,
  output logic [IW-1:0]  out_base,
  output fp32_t          out_data [COLS],
  output logic           out_mask [COLS],
  output logic           out_last
);
  fp32_t a_wdata [ROWS];
  fp32_t a_rdata [ROWS];
  fp32_t b_rdata [ROWS];
  fp32_t c_rdata [COLS];
  fp32_t a_col   [ROWS];
  fp32_t tile    [ROWS][COLS];

  logic           arr_clr, arr_issue, a_from_bmem, issue_q, sel_q;
  logic           amem_re, cmem_re, bmem_re, bmem_rd_bank;
  logic [AAW-1:0] amem_raddr;
  logic [CAW-1:0] cmem_raddr;
  logic [BAW:0]   bmem_rd_row;
  logic [$clog2(RANK)-1:0] bmem_rd_k;
  logic           rs_start, rs_last, rs_final, rs_bank, rs_done, rs_busy, ctrl_busy, ctrl_done;
  logic [IW-1:0]  rs_m0, rs_n0, rs_m, rs_n;
  logic           wr_en, wr_bank;
  logic [IW-1:0]  wr_base;
  fp32_t          wr_data [COLS];
  logic           wr_mask [COLS];

  always_comb for (int r = 0; r < ROWS; r++) a_wdata[r] = ld_data[r];

  tt_wide_mem #(.DEPTH(AMEM_DEPTH), .LANES(ROWS)) u_amem (
    .clk, .we(ld_we && ld_sel == TT_LOAD_A), .waddr(ld_addr[AAW-1:0]), .wdata(a_wdata),
    .re(amem_re), .raddr(amem_raddr), .rdata(a_rdata));

  tt_wide_mem #(.DEPTH(CMEM_DEPTH), .LANES(COLS)) u_cmem (
    .clk, .we(ld_we && ld_sel == TT_LOAD_C), .waddr(ld_addr), .wdata(ld_data),
    .re(cmem_re), .raddr(cmem_raddr), .rdata(c_rdata));

  tt_bmem #(.DEPTH(BMEM_DEPTH), .WR_LANES(COLS), .RD_LANES(ROWS), .RANK(RANK)) u_bmem (
    .clk, .wr_en, .wr_bank, .wr_base(wr_base[BAW:0]), .wr_data, .wr_mask,
    .rd_en(bmem_re), .rd_bank(bmem_rd_bank), .rd_row(bmem_rd_row), .rd_k(bmem_rd_k),
    .rdata(b_rdata));

  tt_array_ctrl #(.ROWS(ROWS), .COLS(COLS), .RANK(RANK), .TT_DIM(TT_DIM), .IW(IW),
                  .AAW(AAW), .CAW(CAW), .BAW(BAW)) u_ctrl (
    .clk, .rst_n, .cfg_i, .cfg_j, .cfg_cbase,
    .req_valid, .req_ready, .req_row, .busy(ctrl_busy), .done(ctrl_done),
    .arr_clr, .arr_issue, .a_from_bmem,
    .amem_re, .amem_raddr, .cmem_re, .cmem_raddr,
    .bmem_re, .bmem_rd_bank, .bmem_rd_row, .bmem_rd_k,
    .rs_start, .rs_m0, .rs_n0, .rs_m, .rs_n, .rs_last, .rs_final, .rs_bank, .rs_done);

  // memory read latency is one cycle: align the array valid and A source
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_q <= 1'b0;
      sel_q   <= 1'b0;
    end else begin
      issue_q <= arr_issue;
      sel_q   <= a_from_bmem;
    end
  end
  always_comb for (int r = 0; r < ROWS; r++) a_col[r] = sel_q ? b_rdata[r] : a_rdata[r];

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .clr(arr_clr), .in_vld(issue_q), .a_col, .b_row(c_rdata), .acc(tile));

  tt_reshaper #(.ROWS(ROWS), .COLS(COLS), .IW(IW)) u_reshaper (
    .clk, .rst_n, .start(rs_start), .m0(rs_m0), .n0(rs_n0), .m_rows(rs_m), .n_cols(rs_n),
    .last(rs_last), .final_tile(rs_final), .bank(rs_bank), .tile,
    .busy(rs_busy), .done(rs_done),
    .wr_en, .wr_bank, .wr_base, .wr_data, .wr_mask,
    .out_valid, .out_ready, .out_base, .out_data, .out_mask, .out_last);

  assign busy = ctrl_busy | rs_busy;
endmodule
