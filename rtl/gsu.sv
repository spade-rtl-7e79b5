// gsu: control of the Gather-Scatter Unit: the gather, compute and scatter control
// units with the load/store address generator. It runs one layer as the paper's
// seven-instruction dataflow:
//
//   load coordinates (DRAM -> coordinate buffer); RuleGen (rule generator, then
//   active tile manager)
//   for each output-channel tile mt:
//     for each active tile t:
//       Gather_inp  : pillars I_s..I_e, all input-channel tiles, DRAM -> BUF_in
//       for each input-channel tile ct, for each weight w with rules in the tile:
//         Gather_wgt: PE_ROWS weight rows, DRAM -> weight buffer
//         Load_wgt  : shift the rows into the PE array (PE_ROWS stall cycles)
//         MXU       : one rule per cycle: BUF_in[(i-I_s)*CT+ct] enters the MXU
//                     tagged with o-O_s; results accumulate into BUF_out
//       Copy_psum   : outputs from the next tile's O_s to O_e move to the other bank
//       Scatter_out : outputs O_s .. next O_s - 1 are final: through the SFU
//                     (prune, ReLU, requantise) and, if kept, to DRAM together
//                     with their coordinates; then the banks swap
//
// Buffer addresses are offsets from the tile's start indices, as in the paper. The
// steps run one after another (no overlap by double buffering), and RuleGen runs
// once for the whole layer, both simplifications of the paper's dataflow. DRAM
// layout (this design's): coordinate k at coord_in/coord_out + k ({y,x} in the low
// bits); input slice (p,ct) at feat_in + p*CT + ct; weight row r of (mt,ct,w) at
// wgt + ((mt*CT+ct)*9+w)*PE_ROWS + r; output slice (k,mt) at feat_out + k*MT + mt.
// Pruning needs all output channels, so it is applied only to SPCONV_P layers with
// MT = 1. Memory protocol: requests handshake on valid/ready; read data returns in
// request order on mem_rsp_valid. `cnt` counts the cycles spent in each of the
// seven instructions (0 RuleGen, 1 Gather_inp, 2 Gather_wgt, 3 Load_wgt, 4 MXU,
// 5 Copy_psum, 6 Scatter_out).
//
// The GSU only steers data: DRAM read data goes straight to the input and weight
// buffers, and the SFU result straight to the DRAM write port, so most of its output
// bits are plain wires from its inputs, qualified by the write enables it drives.
module gsu
  import spade_pkg::*;
#(
  parameter int unsigned PE_ROWS   = 64,
  parameter int unsigned PE_COLS   = 64,
  parameter int unsigned GB_DEPTH  = 512,
  parameter int unsigned OB_DEPTH  = 1024,
  parameter int unsigned DW        = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  layer_cfg_t                 cfg,
  output logic                       busy,
  output logic                       done,
  output logic                       error,
  output logic [IDX_W-1:0]           n_written,
  output logic [31:0]                cnt [7],
  // DRAM
  output logic                       mem_req_valid,
  output logic                       mem_req_we,
  output logic [ADDR_W-1:0]          mem_req_addr,
  output logic [DW-1:0]              mem_req_wdata,
  input  logic                       mem_req_ready,
  input  logic                       mem_rsp_valid,
  input  logic [DW-1:0]              mem_rsp_rdata,
  // coordinate buffer
  output logic                       cb_clr,
  output logic                       cb_wr_en,
  output coord_t                     cb_wr_coord,
  output logic [IDX_W-1:0]           oc_raddr,
  input  coord_t                     oc_rdata,
  // rule generator / rule buffer / tile manager
  output logic                       rg_start,
  input  logic                       rg_done,
  input  logic [IDX_W-1:0]           rg_n_out,
  output logic                       rb_clr,
  output logic [3:0]                 cu_bank,
  output logic [IDX_W-1:0]           cu_addr,
  input  rule_t                      cu_q,
  output logic                       atm_start,
  input  logic                       atm_done,
  input  logic                       atm_overflow,
  input  logic [IDX_W-1:0]           atm_n_tiles,
  output logic [IDX_W-1:0]           in_cap,
  output logic [IDX_W-1:0]           out_cap,
  output logic [IDX_W-1:0]           tile_idx,
  input  tile_t                      tile_q,
  // global (input) buffer
  output logic                       gb_we,
  output logic [$clog2(GB_DEPTH)-1:0] gb_waddr,
  output logic [PE_ROWS*8-1:0]       gb_wdata,
  output logic [$clog2(GB_DEPTH)-1:0] gb_raddr,
  input  logic [PE_ROWS*8-1:0]       gb_rdata,
  // weight buffer
  output logic                       wb_we,
  output logic [$clog2(PE_ROWS)-1:0] wb_waddr,
  output logic [PE_COLS*8-1:0]       wb_wdata,
  output logic [$clog2(PE_ROWS)-1:0] wb_raddr,
  input  logic [PE_COLS*8-1:0]       wb_rdata,
  // MXU
  output logic                       wl_en,
  output logic [PE_COLS*8-1:0]       wl_data,
  output logic                       mx_valid,
  output logic [PE_ROWS*8-1:0]       mx_vec,
  output logic [IDX_W-1:0]           mx_tag,
  input  logic                       mx_busy,
  // output buffer and SFU
  output logic                       ob_clr_all,
  output logic                       ob_swap,
  output logic                       cp_en,
  output logic [$clog2(OB_DEPTH)-1:0] cp_src,
  output logic [$clog2(OB_DEPTH)-1:0] cp_dst,
  output logic [$clog2(OB_DEPTH)-1:0] ob_raddr,
  input  logic                       sfu_keep,
  input  logic [PE_COLS*8-1:0]       sfu_vec,
  output logic                       prune_en
);
  localparam int unsigned GAW = $clog2(GB_DEPTH);
  localparam int unsigned OAW = $clog2(OB_DEPTH);
  localparam int unsigned RAW = $clog2(PE_ROWS);

  typedef enum logic [4:0] {
    S_IDLE, S_LDC, S_RG, S_ATM, S_TILE, S_TILE2, S_GIN, S_WSEL, S_GW, S_LW,
    S_MX, S_DRAIN, S_COPY, S_SCAT, S_SCAT_C, S_NEXT, S_DONE
  } state_e;
  state_e st;

  layer_cfg_t          c;
  logic [IDX_W-1:0]    n_out, n_tiles;
  logic [IDX_W-1:0]    t, f_next, k, kout;
  tile_t               tl;
  logic [7:0]          mt, ct;
  logic [3:0]          w;
  logic                first;

  // ---------------- read engine (gathers) ----------------
  logic [ADDR_W-1:0]   rd_base;
  logic [31:0]         rd_n, ri, rr;
  logic                rd_state;
  assign rd_state = (st == S_LDC) || (st == S_GIN) || (st == S_GW);

  // ---------------- outputs ----------------
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = '0;
    if (rd_state && ri < rd_n) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = rd_base + ri;
    end
    if (st == S_SCAT && k < f_next - tl.o_s && sfu_keep) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = c.feat_out + ADDR_W'(kout) * ADDR_W'(c.mt) + ADDR_W'(mt);
      mem_req_wdata = DW'(sfu_vec);
    end
    if (st == S_SCAT_C) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = c.coord_out + ADDR_W'(kout);
      mem_req_wdata = DW'(oc_rdata);
    end

    cb_clr      = (st == S_IDLE) && start;
    rb_clr      = cb_clr;
    cb_wr_en    = (st == S_LDC) && mem_rsp_valid;
    cb_wr_coord = mem_rsp_rdata[2*COORD_W-1:0];

    gb_we    = (st == S_GIN) && mem_rsp_valid;
    gb_waddr = GAW'(rr);
    gb_wdata = mem_rsp_rdata[PE_ROWS*8-1:0];
    wb_we    = (st == S_GW) && mem_rsp_valid;
    wb_waddr = RAW'(rr);
    wb_wdata = mem_rsp_rdata[PE_COLS*8-1:0];

    wl_en    = (st == S_LW);
    wb_raddr = RAW'(PE_ROWS - 1) - RAW'(k);
    wl_data  = wb_rdata;

    cu_bank  = w;
    cu_addr  = tl.ws[w] + k;
    gb_raddr = GAW'((cu_q.i - tl.i_s) * IDX_W'(c.ct) + IDX_W'(ct));
    mx_valid = (st == S_MX) && (k < tl.wc[w]);
    mx_vec   = gb_rdata;
    mx_tag   = cu_q.o - tl.o_s;

    tile_idx   = (st == S_TILE2) ? t + 1'b1 : t;
    ob_clr_all = (st == S_TILE) && first;
    cp_en      = (st == S_COPY) && (f_next + k <= tl.o_e);
    cp_src     = OAW'(f_next - tl.o_s + k);
    cp_dst     = OAW'(k);
    ob_raddr   = OAW'(k);
    ob_swap    = (st == S_NEXT);
    oc_raddr   = tl.o_s + k;

    rg_start   = (st == S_LDC) && (rr == rd_n);
    atm_start  = (st == S_RG) && rg_done;
    prune_en   = (c.mode == SPCONV_P) && (c.mt == 8'd1);
    out_cap    = IDX_W'(OB_DEPTH);
    in_cap     = IDX_W'(GB_DEPTH) / IDX_W'((c.ct == 0) ? 8'd1 : c.ct);
  end

  // next weight / channel tile
  logic       last_w;
  logic [3:0] n_w;
  always_comb begin
    n_w    = (c.mode == SPDECONV) ? 4'd4 : 4'(KERNEL);
    last_w = (w + 1'b1 == n_w) && (ct + 1'b1 == c.ct);
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; n_out <= '0; n_tiles <= '0; t <= '0; f_next <= '0;
      k <= '0; kout <= '0; tl <= '0; mt <= '0; ct <= '0; w <= '0; first <= 1'b0;
      rd_base <= '0; rd_n <= '0; ri <= '0; rr <= '0;
      done <= 1'b0; error <= 1'b0; n_written <= '0;
      for (int i = 0; i < 7; i++) cnt[i] <= '0;
    end else begin
      done <= 1'b0;
      // read engine counters
      if (mem_req_valid && !mem_req_we && mem_req_ready) ri <= ri + 1;
      if (rd_state && mem_rsp_valid) rr <= rr + 1;

      // per-instruction cycle counters
      unique case (st)
        S_LDC, S_RG, S_ATM:  cnt[0] <= cnt[0] + 1;
        S_GIN:               cnt[1] <= cnt[1] + 1;
        S_GW:                cnt[2] <= cnt[2] + 1;
        S_LW:                cnt[3] <= cnt[3] + 1;
        S_MX, S_DRAIN:       cnt[4] <= cnt[4] + 1;
        S_COPY:              cnt[5] <= cnt[5] + 1;
        S_SCAT, S_SCAT_C:    cnt[6] <= cnt[6] + 1;
        default: ;
      endcase

      unique case (st)
        S_IDLE: if (start) begin
          c <= cfg; error <= 1'b0;
          for (int i = 0; i < 7; i++) cnt[i] <= '0;
          rd_base <= cfg.coord_in; rd_n <= 32'(cfg.n_in); ri <= '0; rr <= '0;
          st <= S_LDC;
        end
        S_LDC: if (rr == rd_n) st <= S_RG;
        S_RG:  if (rg_done) begin n_out <= rg_n_out; st <= S_ATM; end
        S_ATM: if (atm_done) begin
          n_tiles <= atm_n_tiles;
          if (atm_overflow) error <= 1'b1;
          mt <= '0; t <= '0; first <= 1'b1; kout <= '0;
          st <= (atm_n_tiles == 0 || atm_overflow) ? S_DONE : S_TILE;
        end
        S_TILE: begin
          tl <= tile_q; first <= 1'b0;
          st <= S_TILE2;
        end
        S_TILE2: begin
          f_next  <= (t + 1'b1 < n_tiles) ? tile_q.o_s : n_out;
          rd_base <= c.feat_in + ADDR_W'(tl.i_s) * ADDR_W'(c.ct);
          rd_n    <= (32'(tl.i_e) - 32'(tl.i_s) + 32'd1) * 32'(c.ct);
          ri <= '0; rr <= '0;
          st <= S_GIN;
        end
        S_GIN: if (rr == rd_n) begin
          ct <= '0; w <= '0;
          st <= S_WSEL;
        end
        S_WSEL: begin
          if (tl.wc[w] != 0) begin
            rd_base <= c.wgt + ((ADDR_W'(mt) * ADDR_W'(c.ct) + ADDR_W'(ct)) * ADDR_W'(KERNEL)
                               + ADDR_W'(w)) * ADDR_W'(PE_ROWS);
            rd_n <= 32'(PE_ROWS); ri <= '0; rr <= '0;
            st <= S_GW;
          end else if (last_w) begin
            k <= '0; st <= S_COPY;
          end else if (w + 1'b1 == n_w) begin
            w <= '0; ct <= ct + 1'b1;
          end else begin
            w <= w + 1'b1;
          end
        end
        S_GW: if (rr == rd_n) begin k <= '0; st <= S_LW; end
        S_LW: begin
          if (k == IDX_W'(PE_ROWS - 1)) begin k <= '0; st <= S_MX; end
          else k <= k + 1'b1;
        end
        S_MX: begin
          if (k + 1'b1 >= tl.wc[w]) st <= S_DRAIN;
          k <= k + 1'b1;
        end
        S_DRAIN: if (!mx_busy) begin
          k <= '0;
          if (last_w) st <= S_COPY;
          else begin
            st <= S_WSEL;
            if (w + 1'b1 == n_w) begin w <= '0; ct <= ct + 1'b1; end
            else w <= w + 1'b1;
          end
        end
        S_COPY: begin
          if (f_next + k <= tl.o_e) k <= k + 1'b1;
          else begin k <= '0; st <= S_SCAT; end
        end
        S_SCAT: begin
          if (k >= f_next - tl.o_s) st <= S_NEXT;
          else if (!sfu_keep) k <= k + 1'b1;
          else if (mem_req_ready) begin
            if (mt == 0) st <= S_SCAT_C;
            else begin k <= k + 1'b1; kout <= kout + 1'b1; end
          end
        end
        S_SCAT_C: if (mem_req_ready) begin
          k <= k + 1'b1; kout <= kout + 1'b1; st <= S_SCAT;
        end
        S_NEXT: begin
          k <= '0;
          if (t + 1'b1 < n_tiles) begin
            t <= t + 1'b1; st <= S_TILE;
          end else if (mt + 1'b1 < c.mt) begin
            mt <= mt + 1'b1; t <= '0; first <= 1'b1; kout <= '0; st <= S_TILE;
          end else begin
            st <= S_DONE;
          end
        end
        S_DONE: begin
          done <= 1'b1; n_written <= kout; st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  a_rule_in_tile: assert property (@(posedge clk) disable iff (!rst_n)
      mx_valid |-> cu_q.i >= tl.i_s && cu_q.i <= tl.i_e &&
                   cu_q.o >= tl.o_s && cu_q.o - tl.o_s < IDX_W'(OB_DEPTH));
endmodule
