// rgu: Rule Generator Unit. Turns the CPR coordinates of the active input pillars
// into "rules": for each of the nine kernel weights, the list of (input index,
// output index) pairs that the weight connects. It never searches: because CPR
// keeps pillars in raster order, one streaming pass in three stages is enough.
//
//  1. Alignment. Three FIFOs (top, centre, bottom) hold the input rows y-1, y, y+1
//     around output row y. Before each row's pass the bottom FIFO is filled with
//     row y+1 from the coordinate buffer (one pillar per cycle). During the pass an
//     entry popped from the centre FIFO is pushed into the top FIFO and one popped
//     from the bottom FIFO into the centre FIFO, so each row moves up the chain.
//  2. Row merge. Each cycle the smallest column among the three FIFO heads is
//     popped from every FIFO that holds it, giving one merged entry: a column, and
//     for top/centre/bottom a valid flag and an input index.
//  3. Column-wise dilation. The merged entry (registered) is spread to the output
//     columns it reaches. Output indices are handed out in raster order from a
//     running counter, so they ascend, and every rule bank receives at most one
//     rule per cycle, in ascending input and output order.
//
// Kernel orientation, as in the paper's figures: bank w = 3*(dy+1)+(dx+1) pairs an
// input at row y+dy with output row y, and an input at column x with output
// column x+dx (for example a bottom-row input at column c feeds W(+,-) -> c-1,
// W(+,0) -> c, W(+,+) -> c+1).
//
// Modes: SPCONV and SPCONV_P dilate to every output in reach (the pruning of
// SPCONV_P happens later, in the SFU). SPSTCONV keeps only even output rows and
// columns and places them at half the coordinate. SPCONV_S keeps only outputs at
// active centre-row inputs, with output index = input index; horizontal neighbours
// are paired through a one-entry history register. SPDECONV does not merge rows: it
// walks each input row once and expands every pillar into a 2x2 block of outputs
// (a 2x2, stride-2 kernel in banks 0..3). The paper names the modes and the three
// stages; the deconvolution kernel size, the odd-row rule of the strided mode and
// the cycle-level sequencing are this design's choices.
//
// Timing: a layer takes about 2*grid_h + 2*P + (merged columns) cycles, linear in
// the number of active pillars P. `done` pulses for one cycle at the end, and
// `n_out` then holds the number of output pillars.
module rgu
  import spade_pkg::*;
#(
  parameter int unsigned MAX_W = 512    // widest input grid row
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  conv_mode_e          mode,
  input  logic [COORD_W-1:0]  grid_h,
  input  logic [COORD_W-1:0]  grid_w,
  // coordinate buffer (asynchronous reads)
  output logic [COORD_W-1:0]  cb_row,
  input  logic [IDX_W-1:0]    cb_row_start,
  input  logic [IDX_W-1:0]    cb_row_len,
  output logic [IDX_W-1:0]    cb_idx,
  input  logic [COORD_W-1:0]  cb_col,
  // rules, one write port per weight bank
  output logic [KERNEL-1:0]   rule_we,
  output rule_t               rule_d [KERNEL],
  // output pillar coordinates
  output logic [3:0]          oc_we,
  output logic [IDX_W-1:0]    oc_waddr [4],
  output coord_t              oc_wdata [4],
  output logic [IDX_W-1:0]    n_out,
  output logic                busy,
  output logic                done
);
  localparam int unsigned EW = COORD_W + IDX_W;     // FIFO entry: {col, idx}
  localparam int unsigned SW = COORD_W + 2;         // signed column arithmetic

  typedef enum logic [2:0] {S_IDLE, S_LSET, S_LOAD, S_MSET, S_MERGE, S_REND,
                            S_DSET, S_DRUN} state_e;
  state_e st;

  conv_mode_e            md;
  logic signed [SW-1:0]  r;          // output row (input-grid coordinates)
  logic [IDX_W-1:0]      ptr, pend;  // pillar read pointer / end of row
  logic [IDX_W-1:0]      rem [3];    // entries of the old row left in each FIFO
  logic [IDX_W-1:0]      q_next;     // next free output index
  logic [IDX_W-1:0]      dc_base, dc_n, dc_k;

  // ---------------- alignment: FIFO chain ----------------
  logic [2:0]    f_push, f_pop;
  logic [EW-1:0] f_din [3];
  logic [EW-1:0] f_dout [3];
  logic [$clog2(MAX_W+1)-1:0] f_cnt [3];
  logic          f_clr;

  for (genvar g = 0; g < 3; g++) begin : g_fifo
    sync_fifo #(.WIDTH(EW), .DEPTH(MAX_W)) u_fifo (
      .clk, .rst_n, .clr(f_clr), .push(f_push[g]), .din(f_din[g]),
      .pop(f_pop[g]), .dout(f_dout[g]), .count(f_cnt[g]));
  end

  // ---------------- row merge ----------------
  logic [2:0]          h_ok;
  logic [COORD_W-1:0]  h_col [3];
  logic [COORD_W-1:0]  min_col;
  logic                merging;

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      h_ok[k]  = (rem[k] != 0);
      h_col[k] = f_dout[k][EW-1 -: COORD_W];
    end
    min_col = '1;
    for (int k = 0; k < 3; k++)
      if (h_ok[k] && h_col[k] < min_col) min_col = h_col[k];
    merging = (st == S_MERGE) && (h_ok != 3'b000);
  end

  // merged entry register (feeds the dilation stage)
  logic               e_v;
  logic [COORD_W-1:0] e_c;
  logic [2:0]         e_has;
  logic [IDX_W-1:0]   e_i [3];

  always_comb begin
    f_clr  = (st == S_IDLE) && start;
    f_push = '0;
    f_pop  = '0;
    for (int k = 0; k < 3; k++) f_din[k] = '0;
    if (st == S_LOAD && ptr != pend) begin
      f_push[2] = 1'b1;
      f_din[2]  = {cb_col, ptr};
    end
    if (merging) begin
      for (int k = 0; k < 3; k++) f_pop[k] = h_ok[k] && (h_col[k] == min_col);
      f_push[0] = f_pop[1];  f_din[0] = f_dout[1];
      f_push[1] = f_pop[2];  f_din[1] = f_dout[2];
    end
  end

  // ---------------- column-wise dilation ----------------
  logic                 has_last;
  logic signed [SW-1:0] last_col;
  logic [IDX_W-1:0]     last_q;
  // history entry for submanifold pairing
  logic                 p_v;
  logic [COORD_W-1:0]   p_c;
  logic [2:0]           p_has;
  logic [IDX_W-1:0]     p_i [3];

  logic                 emit_row;
  logic signed [SW-1:0] xk [3];
  logic [2:0]           keep, isnew;
  logic [IDX_W-1:0]     qk [3];
  logic [1:0]           n_new;
  logic                 upd_last;
  logic signed [SW-1:0] upd_col;
  logic [IDX_W-1:0]     upd_q;

  always_comb begin
    emit_row = (r >= 0) && !(md == SPSTCONV && r[0]);
    rule_we  = '0;
    for (int w = 0; w < KERNEL; w++) rule_d[w] = '0;
    oc_we    = '0;
    for (int k = 0; k < 4; k++) begin oc_waddr[k] = '0; oc_wdata[k] = '0; end
    n_new    = '0;
    upd_last = 1'b0;
    upd_col  = last_col;
    upd_q    = last_q;
    for (int k = 0; k < 3; k++) begin
      xk[k]    = $signed({2'b00, e_c}) - SW'(1) + SW'(k);
      keep[k]  = 1'b0;
      isnew[k] = 1'b0;
      qk[k]    = '0;
    end

    if (e_v && emit_row && md != SPCONV_S) begin
      // dilating modes: candidate output columns c-1, c, c+1
      for (int k = 0; k < 3; k++) begin
        keep[k]  = (xk[k] >= 0) && (xk[k] < $signed({2'b00, grid_w})) &&
                   !(md == SPSTCONV && xk[k][0]);
        isnew[k] = keep[k] && (!has_last || xk[k] > last_col);
        if (isnew[k]) begin
          qk[k] = q_next + IDX_W'(n_new);
          n_new = n_new + 1'b1;
          upd_last = 1'b1;
          upd_col  = xk[k];
          upd_q    = qk[k];
        end else begin
          qk[k] = last_q - IDX_W'(last_col - xk[k]);
        end
        if (isnew[k]) begin
          oc_we[k]    = 1'b1;
          oc_waddr[k] = qk[k];
          oc_wdata[k] = (md == SPSTCONV) ?
              '{y: COORD_W'(r >>> 1), x: COORD_W'(xk[k] >>> 1)} :
              '{y: COORD_W'(r),       x: COORD_W'(xk[k])};
        end
      end
      for (int d = 0; d < 3; d++)
        for (int dx = -1; dx <= 1; dx++)
          if (e_has[d] && keep[dx+1]) begin
            rule_we[wbank(d-1, dx)] = 1'b1;
            rule_d[wbank(d-1, dx)]  = '{i: e_i[d], o: qk[dx+1]};
          end
    end

    if (e_v && emit_row && md == SPCONV_S) begin
      if (e_has[1]) begin
        for (int d = 0; d < 3; d++)
          if (e_has[d]) begin
            rule_we[wbank(d-1, 0)] = 1'b1;
            rule_d[wbank(d-1, 0)]  = '{i: e_i[d], o: e_i[1]};
          end
        oc_we[0]    = 1'b1;
        oc_waddr[0] = e_i[1];
        oc_wdata[0] = '{y: COORD_W'(r), x: e_c};
        n_new       = 2'd1;
      end
      if (p_v && (p_c + 1'b1 == e_c)) begin
        for (int d = 0; d < 3; d++) begin
          if (e_has[1] && p_has[d]) begin     // left input -> this output
            rule_we[wbank(d-1, 1)] = 1'b1;
            rule_d[wbank(d-1, 1)]  = '{i: p_i[d], o: e_i[1]};
          end
          if (p_has[1] && e_has[d]) begin     // this input -> left output
            rule_we[wbank(d-1, -1)] = 1'b1;
            rule_d[wbank(d-1, -1)]  = '{i: e_i[d], o: p_i[1]};
          end
        end
      end
    end

    if (st == S_DRUN && dc_k != dc_n) begin
      // deconvolution: input k of row y -> outputs (2y+a, 2x+b)
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          rule_we[a*2+b]  = 1'b1;
          rule_d[a*2+b]   = '{i: ptr,
                              o: dc_base + ((a == 1) ? (dc_n << 1) : '0) + (dc_k << 1) + IDX_W'(b)};
          oc_we[a*2+b]    = 1'b1;
          oc_waddr[a*2+b] = rule_d[a*2+b].o;
          oc_wdata[a*2+b] = '{y: COORD_W'({r[COORD_W-2:0], 1'b0}) + COORD_W'(a),
                              x: {cb_col[COORD_W-2:0], 1'b0} + COORD_W'(b)};
        end
    end
  end

  // ---------------- coordinate buffer addressing ----------------
  always_comb begin
    cb_row = (st == S_LSET) ? COORD_W'(r + 1) : COORD_W'(r);
    cb_idx = ptr;
  end

  // ---------------- control ----------------
  logic [COORD_W-1:0] next_row;
  assign next_row = COORD_W'(r + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; md <= SPCONV; r <= '0; ptr <= '0; pend <= '0;
      for (int k = 0; k < 3; k++) begin rem[k] <= '0; e_i[k] <= '0; p_i[k] <= '0; end
      q_next <= '0; n_out <= '0; done <= 1'b0;
      e_v <= 1'b0; e_c <= '0; e_has <= '0;
      p_v <= 1'b0; p_c <= '0; p_has <= '0;
      has_last <= 1'b0; last_col <= '0; last_q <= '0;
      dc_base <= '0; dc_n <= '0; dc_k <= '0;
    end else begin
      done <= 1'b0;
      // dilation-stage state update
      if (e_v) begin
        if (md == SPCONV_S) begin
          p_v <= 1'b1; p_c <= e_c; p_has <= e_has; p_i <= e_i;
        end
        if (upd_last) begin
          has_last <= 1'b1; last_col <= upd_col; last_q <= upd_q;
        end
        q_next <= q_next + IDX_W'(n_new);
      end
      // merge-stage register
      e_v <= merging;
      if (merging) begin
        e_c <= min_col;
        for (int k = 0; k < 3; k++) begin
          e_has[k] <= f_pop[k];
          e_i[k]   <= f_dout[k][IDX_W-1:0];
          if (f_pop[k]) rem[k] <= rem[k] - 1'b1;
        end
      end

      unique case (st)
        S_IDLE: if (start) begin
          md <= mode; q_next <= '0; n_out <= '0;
          if (mode == SPDECONV) begin
            r <= '0; dc_base <= '0;
            st <= S_DSET;
          end else begin
            r <= -SW'(1);
            st <= S_LSET;
          end
        end
        S_LSET: begin
          if (next_row < grid_h && r + 1 < $signed({2'b00, grid_h})) begin
            ptr  <= cb_row_start;
            pend <= cb_row_start + cb_row_len;
          end else begin
            ptr <= '0; pend <= '0;
          end
          st <= S_LOAD;
        end
        S_LOAD: begin
          if (ptr != pend) ptr <= ptr + 1'b1;
          else st <= S_MSET;
        end
        S_MSET: begin
          for (int k = 0; k < 3; k++) rem[k] <= IDX_W'(f_cnt[k]);
          p_v <= 1'b0; has_last <= 1'b0;
          st <= S_MERGE;
        end
        S_MERGE: if (!merging) st <= S_REND;
        S_REND: begin
          // the last merged entry is dilated during this cycle
          if (r + 1 >= $signed({2'b00, grid_h})) begin
            st <= S_IDLE; done <= 1'b1; n_out <= q_next + IDX_W'(n_new);
          end else begin
            r  <= r + 1;
            st <= S_LSET;
          end
        end
        S_DSET: begin
          if (r >= $signed({2'b00, grid_h})) begin
            st <= S_IDLE; done <= 1'b1; n_out <= dc_base;
          end else begin
            ptr <= cb_row_start; dc_n <= cb_row_len; dc_k <= '0;
            st  <= S_DRUN;
          end
        end
        S_DRUN: begin
          if (dc_k != dc_n) begin
            dc_k <= dc_k + 1'b1; ptr <= ptr + 1'b1;
          end else begin
            dc_base <= dc_base + (dc_n << 2);
            r  <= r + 1;
            st <= S_DSET;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  // At most one rule per bank per cycle is structural; the FIFO never overflows
  // because a row holds at most grid_w <= MAX_W pillars.
  a_width: assert property (@(posedge clk) disable iff (!rst_n)
                            start |-> grid_w <= COORD_W'(MAX_W));
endmodule
