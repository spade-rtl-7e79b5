// spade_top: the SPADE vector-sparse convolution accelerator for pillar-based 3D
// object detection. It computes one sparse convolution layer per `start`: the
// active pillars (coordinates and feature vectors) and the weights are read from
// external memory, and the output pillars that survive pruning (features and
// coordinates) are written back, ready to be the next layer's input.
//
// Structure (the paper's overall architecture):
//   coordinate buffer -> rule generator (RGU) -> rule buffer (9 banks)
//   -> active tile manager (ATM) -> gather/scatter control (GSU)
//   GSU gathers pillars into the global buffer and weights into the weight buffer,
//   streams rule-selected pillars through the weight-stationary MXU, accumulates
//   partial sums in the two-bank output buffer, copies carried-over partial sums,
//   and scatters final outputs through the SFU (prune, ReLU, requantise) to memory.
//
// Interface: `start` with a layer configuration (`cfg`), `done` when the layer has
// been written, `n_written` output pillars. One memory port: requests handshake
// on mem_req_valid/mem_req_ready (write when mem_req_we), read data returns in order
// on mem_rsp_valid. `error` reports an active tile that cannot fit the buffers.
// `cnt` gives the cycles spent per instruction (see gsu). The off-chip DRAM itself
// is not part of this design.
//
// Defaults are the paper's high-end configuration: a 64x64 PE array and a 32 KB
// BUF_in; grid, pillar, rule and BUF_out sizes are this design's choices.
module spade_top
  import spade_pkg::*;
#(
  parameter int unsigned PE_ROWS    = 64,
  parameter int unsigned PE_COLS    = 64,
  parameter int unsigned GB_DEPTH   = 512,
  parameter int unsigned OB_DEPTH   = 1024,
  parameter int unsigned MAX_W      = 512,
  parameter int unsigned MAX_H      = 512,
  parameter int unsigned P_MAX      = 16384,
  parameter int unsigned O_MAX      = 65536,
  parameter int unsigned MAX_TILES  = 1024,
  parameter int unsigned DW         = ((PE_ROWS > PE_COLS) ? PE_ROWS : PE_COLS) * 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               busy,
  output logic               done,
  output logic               error,
  output logic [IDX_W-1:0]   n_written,
  output logic [IDX_W-1:0]   n_rule_out,
  output logic [IDX_W-1:0]   n_tiles,
  output logic [31:0]        cnt [7],
  output logic               mem_req_valid,
  output logic               mem_req_we,
  output logic [ADDR_W-1:0]  mem_req_addr,
  output logic [DW-1:0]      mem_req_wdata,
  input  logic               mem_req_ready,
  input  logic               mem_rsp_valid,
  input  logic [DW-1:0]      mem_rsp_rdata
);
  localparam int unsigned GAW = $clog2(GB_DEPTH);
  localparam int unsigned OAW = $clog2(OB_DEPTH);
  localparam int unsigned RAW = $clog2(PE_ROWS);

  // coordinate buffer
  logic               cb_clr, cb_wr_en;
  coord_t             cb_wr_coord;
  logic [IDX_W-1:0]   cb_n_in, cb_row_start, cb_row_len, cb_idx;
  logic [COORD_W-1:0] cb_row, cb_col;
  logic [3:0]         oc_we;
  logic [IDX_W-1:0]   oc_waddr [4];
  coord_t             oc_wdata [4];
  logic [IDX_W-1:0]   oc_raddr;
  coord_t             oc_rdata;
  // rules
  logic               rg_start, rg_done, rg_busy, rb_clr;
  logic [KERNEL-1:0]  rule_we;
  rule_t              rule_d [KERNEL];
  logic [IDX_W-1:0]   rb_count [KERNEL];
  logic [IDX_W-1:0]   atm_addr [KERNEL];
  rule_t              atm_q [KERNEL];
  logic [3:0]         cu_bank;
  logic [IDX_W-1:0]   cu_addr;
  rule_t              cu_q;
  // tiles
  logic               atm_start, atm_done, atm_busy, atm_overflow;
  logic [IDX_W-1:0]   in_cap, out_cap, tile_idx;
  tile_t              tile_q;
  // buffers
  logic               gb_we;
  logic [GAW-1:0]     gb_waddr, gb_raddr;
  logic [PE_ROWS*8-1:0] gb_wdata, gb_rdata;
  logic               wb_we;
  logic [RAW-1:0]     wb_waddr, wb_raddr;
  logic [PE_COLS*8-1:0] wb_wdata, wb_rdata;
  // MXU
  logic               wl_en, mx_valid, mx_busy, mo_valid;
  logic [PE_COLS*8-1:0] wl_data;
  logic [PE_ROWS*8-1:0] mx_vec;
  logic [IDX_W-1:0]   mx_tag, mo_tag;
  logic [PE_COLS*32-1:0] mo_vec;
  // output buffer / SFU
  logic               ob_clr_all, ob_swap, cp_en, ob_rd_valid;
  logic [OAW-1:0]     cp_src, cp_dst, ob_raddr;
  logic [PE_COLS*32-1:0] ob_rd_vec;
  logic               sfu_keep, prune_en;
  logic [39:0]        sfu_mag;
  logic [PE_COLS*8-1:0] sfu_vec;

  coord_buffer #(.MAX_H(MAX_H), .P_MAX(P_MAX), .O_MAX(O_MAX)) u_cb (
    .clk, .rst_n, .clr(cb_clr), .wr_en(cb_wr_en), .wr_coord(cb_wr_coord), .n_in(cb_n_in),
    .rd_row(cb_row), .row_start(cb_row_start), .row_len(cb_row_len),
    .rd_idx(cb_idx), .col(cb_col),
    .oc_we, .oc_waddr, .oc_wdata, .oc_raddr, .oc_rdata);

  rgu #(.MAX_W(MAX_W)) u_rgu (
    .clk, .rst_n, .start(rg_start), .mode(cfg.mode), .grid_h(cfg.grid_h), .grid_w(cfg.grid_w),
    .cb_row, .cb_row_start, .cb_row_len, .cb_idx, .cb_col,
    .rule_we, .rule_d, .oc_we, .oc_waddr, .oc_wdata,
    .n_out(n_rule_out), .busy(rg_busy), .done(rg_done));

  rule_buffer #(.RULE_DEPTH(P_MAX)) u_rb (
    .clk, .rst_n, .clr(rb_clr), .we(rule_we), .wdata(rule_d), .count(rb_count),
    .atm_addr, .atm_q, .cu_bank, .cu_addr, .cu_q);

  atm #(.MAX_TILES(MAX_TILES)) u_atm (
    .clk, .rst_n, .start(atm_start), .n_in(cb_n_in), .in_cap, .out_cap,
    .rb_count, .rb_addr(atm_addr), .rb_q(atm_q),
    .tile_idx, .tile_q, .n_tiles, .overflow(atm_overflow), .busy(atm_busy), .done(atm_done));

  global_buffer #(.DEPTH(GB_DEPTH), .WIDTH(PE_ROWS*8)) u_gb (
    .clk, .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata), .raddr(gb_raddr), .rdata(gb_rdata));

  weight_buffer #(.PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS)) u_wb (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata), .raddr(wb_raddr), .rdata(wb_rdata));

  mxu #(.ROWS(PE_ROWS), .COLS(PE_COLS), .TAG_W(IDX_W)) u_mxu (
    .clk, .rst_n, .wl_en, .wl_data, .in_valid(mx_valid), .in_vec(mx_vec), .in_tag(mx_tag),
    .out_valid(mo_valid), .out_vec(mo_vec), .out_tag(mo_tag), .busy(mx_busy));

  output_buffer #(.DEPTH(OB_DEPTH), .PE_COLS(PE_COLS)) u_ob (
    .clk, .rst_n, .clr_all(ob_clr_all), .swap(ob_swap),
    .acc_en(mo_valid), .acc_addr(OAW'(mo_tag)), .acc_vec(mo_vec),
    .cp_en, .cp_src, .cp_dst, .rd_addr(ob_raddr), .rd_vec(ob_rd_vec), .rd_valid(ob_rd_valid));

  sfu #(.PE_COLS(PE_COLS)) u_sfu (
    .in_vec(ob_rd_vec), .prune_en, .threshold(cfg.threshold), .shift(cfg.shift),
    .keep(sfu_keep), .magnitude(sfu_mag), .out_vec(sfu_vec));

  gsu #(.PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS), .GB_DEPTH(GB_DEPTH), .OB_DEPTH(OB_DEPTH),
        .DW(DW)) u_gsu (
    .clk, .rst_n, .start, .cfg, .busy, .done, .error, .n_written, .cnt,
    .mem_req_valid, .mem_req_we, .mem_req_addr, .mem_req_wdata, .mem_req_ready,
    .mem_rsp_valid, .mem_rsp_rdata,
    .cb_clr, .cb_wr_en, .cb_wr_coord, .oc_raddr, .oc_rdata,
    .rg_start, .rg_done, .rg_n_out(n_rule_out), .rb_clr, .cu_bank, .cu_addr, .cu_q,
    .atm_start, .atm_done, .atm_overflow, .atm_n_tiles(n_tiles), .in_cap, .out_cap,
    .tile_idx, .tile_q,
    .gb_we, .gb_waddr, .gb_wdata, .gb_raddr, .gb_rdata,
    .wb_we, .wb_waddr, .wb_wdata, .wb_raddr, .wb_rdata,
    .wl_en, .wl_data, .mx_valid, .mx_vec, .mx_tag, .mx_busy,
    .ob_clr_all, .ob_swap, .cp_en, .cp_src, .cp_dst, .ob_raddr,
    .sfu_keep, .sfu_vec, .prune_en);

endmodule
