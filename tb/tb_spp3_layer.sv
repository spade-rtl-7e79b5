// tb_spp3_layer: one layer of the size found in the first backbone stage of a
// sparse PointPillars detector on KITTI with submanifold convolutions (SPP3): a
// 432 x 496 pillar grid holding about 12 800 non-empty pillars (6 % occupancy,
// uniformly random here rather than clustered as in real lidar frames), 64 input
// and 64 output channels, SpConv-S, run on the accelerator at its default size.
// Every output coordinate and feature word is compared with a direct software
// evaluation of the convolution. It checks that the layer is split into many
// active tiles and reports the cycles spent in each instruction.
`timescale 1ns/1ps
module tb_spp3_layer;
  import spade_pkg::*;

  localparam int R = 64, CC = 64, DW = 512;
  localparam int GBD = 16, OBD = 32, MAXG = 512;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic busy, done, error;
  logic [IDX_W-1:0] n_written, n_rule_out, n_tiles;
  logic [31:0] cnt [7];
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid, stall_en;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_rsp_rdata;

  spade_top dut (.*);

  dram_model #(.DW(DW), .AW(ADDR_W), .LAT(5)) u_dram (
    .clk, .rst_n, .stall_en, .req_valid(mem_req_valid), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_ready(mem_req_ready),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // monitors
  int n_mx = 0, n_cp = 0;
  always @(posedge clk) begin
    if (dut.mx_valid) n_mx++;
    if (dut.cp_en) n_cp++;
  end

  // mechanism counters
  int m_mode [5], m_tiles = 0, m_copy = 0, m_prune = 0, m_ct = 0, m_mt = 0, m_stall = 0;

  // ---------------- reference model ----------------
  int H, W, P, C, M, CT, MT;
  int occ [MAXG][MAXG];
  int py [16384], px [16384];
  int feat [16384][64];
  int wgt  [9][64][64];
  int exp_y [16384], exp_x [16384];
  longint exp_s [16384][64];
  int n_exp;
  longint pairs;

  function automatic int q8(longint v, int sh);
    longint s;
    if (v < 0) return 0;
    s = v >>> sh;
    return (s > 127) ? 127 : int'(s);
  endfunction

  task automatic make_layer(int h, int w, int dens_pct, int c, int m);
    H = h; W = w; C = c; M = m; CT = C / R; MT = M / CC; P = 0;
    for (int y = 0; y < MAXG; y++) for (int x = 0; x < MAXG; x++) occ[y][x] = -1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        if (($urandom % 100) < dens_pct) begin
          occ[y][x] = P; py[P] = y; px[P] = x;
          for (int k = 0; k < C; k++) feat[P][k] = int'($urandom % 15) - 7;
          P++;
        end
    for (int k = 0; k < 9; k++) for (int a = 0; a < C; a++) for (int b = 0; b < M; b++)
      wgt[k][a][b] = int'($urandom % 15) - 7;
  endtask

  task automatic add_out(int yo, int xo, int y_in [9], int x_in [9], int w_of [9], int n);
    exp_y[n_exp] = yo; exp_x[n_exp] = xo;
    for (int j = 0; j < M; j++) begin
      longint s = 0;
      for (int t = 0; t < n; t++)
        for (int k = 0; k < C; k++)
          s += longint'(feat[occ[y_in[t]][x_in[t]]][k] * wgt[w_of[t]][k][j]);
      exp_s[n_exp][j] = s;
    end
    pairs += n;
    n_exp++;
  endtask

  task automatic reference(conv_mode_e mode);
    int yi [9], xi [9], wi [9], n;
    n_exp = 0; pairs = 0;
    if (mode == SPDECONV) begin
      for (int yo = 0; yo < 2*H; yo++)
        for (int xo = 0; xo < 2*W; xo++)
          if (occ[yo/2][xo/2] >= 0) begin
            yi[0] = yo/2; xi[0] = xo/2; wi[0] = (yo%2)*2 + (xo%2);
            add_out(yo, xo, yi, xi, wi, 1);
          end
      return;
    end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (mode == SPSTCONV && (y % 2 || x % 2)) continue;
        if (mode == SPCONV_S && occ[y][x] < 0) continue;
        n = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            int ys = y + dy, xs = x - dx;       // input at column x-dx reaches x
            if (ys >= 0 && ys < H && xs >= 0 && xs < W && occ[ys][xs] >= 0) begin
              yi[n] = ys; xi[n] = xs; wi[n] = 3*(dy+1) + (dx+1); n++;
            end
          end
        if (n > 0) begin
          if (mode == SPSTCONV) add_out(y/2, x/2, yi, xi, wi, n);
          else                  add_out(y, x, yi, xi, wi, n);
        end
      end
  endtask

  // ---------------- one layer ----------------
  localparam int A_CI = 32'h100000, A_FI = 32'h200000, A_W = 32'h300000,
                 A_FO = 32'h400000, A_CO = 32'h500000;

  task automatic run_layer(conv_mode_e mode, int h, int w, int dens, int c, int m,
                           bit prune_thr, bit stall);
    int shift = 5;
    longint thr = 0;
    int n_keep;
    bit keep [16384];
    longint mags [16384];
    int cyc;
    make_layer(h, w, dens, c, m);
    reference(mode);
    // threshold: keep roughly the upper 60% of magnitudes
    for (int o = 0; o < n_exp; o++) begin
      mags[o] = 0;
      for (int j = 0; j < M; j++) mags[o] += (exp_s[o][j] < 0) ? -exp_s[o][j] : exp_s[o][j];
    end
    if (prune_thr && n_exp > 0) begin
      longint srt [$];
      for (int o = 0; o < n_exp; o++) srt.push_back(mags[o]);
      srt.sort();
      thr = srt[(n_exp * 2) / 5];
    end
    n_keep = 0;
    for (int o = 0; o < n_exp; o++) begin
      keep[o] = !(mode == SPCONV_P && MT == 1) || (mags[o] >= thr);
      if (keep[o]) n_keep++;
    end
    // DRAM image
    u_dram.mem.delete();
    for (int p = 0; p < P; p++) begin
      logic [DW-1:0] cw = '0;
      cw[2*COORD_W-1:0] = {COORD_W'(py[p]), COORD_W'(px[p])};
      u_dram.mem[A_CI + p] = cw;
      for (int t = 0; t < CT; t++) begin
        logic [DW-1:0] fw = '0;
        for (int r = 0; r < R; r++) fw[r*8 +: 8] = 8'(feat[p][t*R + r]);
        u_dram.mem[A_FI + p*CT + t] = fw;
      end
    end
    for (int mt = 0; mt < MT; mt++) for (int t = 0; t < CT; t++) for (int k = 0; k < 9; k++)
      for (int r = 0; r < R; r++) begin
        logic [DW-1:0] ww = '0;
        for (int j = 0; j < CC; j++) ww[j*8 +: 8] = 8'(wgt[k][t*R + r][mt*CC + j]);
        u_dram.mem[A_W + ((mt*CT + t)*9 + k)*R + r] = ww;
      end
    cfg = '0;
    cfg.mode = mode; cfg.grid_h = COORD_W'(H); cfg.grid_w = COORD_W'(W);
    cfg.n_in = IDX_W'(P); cfg.ct = 8'(CT); cfg.mt = 8'(MT);
    cfg.coord_in = A_CI; cfg.feat_in = A_FI; cfg.wgt = A_W;
    cfg.feat_out = A_FO; cfg.coord_out = A_CO; cfg.shift = 5'(shift); cfg.threshold = 40'(thr);
    stall_en = stall;
    n_mx = 0; n_cp = 0;
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    cyc = 0;
    while (!done && cyc < 3000000) begin @(posedge clk); cyc++; end
    check(done, $sformatf("mode %s finished", mode.name()));
    check(!error, "no tile overflow");
    check(int'(n_rule_out) == n_exp, $sformatf("%s outputs %0d expected %0d", mode.name(), n_rule_out, n_exp));
    check(int'(n_written) == n_keep, $sformatf("%s written %0d expected %0d", mode.name(), n_written, n_keep));
    check(longint'(n_mx) == pairs * CT * MT,
          $sformatf("%s MXU issues %0d expected %0d", mode.name(), n_mx, pairs * CT * MT));
    begin
      int k = 0, bad = 0;
      for (int o = 0; o < n_exp; o++) if (keep[o]) begin
        logic [DW-1:0] cw = u_dram.mem.exists(A_CO + k) ? u_dram.mem[A_CO + k] : '1;
        if (cw[2*COORD_W-1:0] != {COORD_W'(exp_y[o]), COORD_W'(exp_x[o])}) bad++;
        for (int mt = 0; mt < MT; mt++) begin
          logic [DW-1:0] fw = u_dram.mem.exists(A_FO + k*MT + mt) ? u_dram.mem[A_FO + k*MT + mt] : '1;
          for (int j = 0; j < CC; j++)
            if (fw[j*8 +: 8] != 8'(q8(exp_s[o][mt*CC + j], shift))) bad++;
        end
        k++;
      end
      check(bad == 0, $sformatf("%s: %0d mismatching output words", mode.name(), bad));
    end
    $display("layer %s: P=%0d outputs=%0d written=%0d tiles=%0d cycles=%0d rulegen=%0d mxu=%0d copy=%0d",
             mode.name(), P, n_rule_out, n_written, n_tiles, cyc, cnt[0], cnt[4], n_cp);
    m_mode[int'(mode)]++;
    if (n_tiles > 1) m_tiles++;
    if (n_cp > 0) m_copy++;
    if (n_written < n_rule_out) m_prune++;
    if (CT > 1) m_ct++;
    if (MT > 1) m_mt++;
    if (u_dram.n_stall > 0) m_stall++;
  endtask

  initial begin
    stall_en = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_layer(SPCONV_S, 496, 432, 6, 64, 64, 0, 0);
    check(m_mode[int'(SPCONV_S)] > 0, "layer ran");
    check(m_tiles > 0, "several active tiles");
    $display("instruction cycles: rulegen=%0d gather_inp=%0d gather_wgt=%0d load_wgt=%0d mxu=%0d copy=%0d scatter=%0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6]);
    $display("mechanisms: tiles=%0d copy=%0d prune=%0d ct=%0d mt=%0d stall=%0d",
             m_tiles, m_copy, m_prune, m_ct, m_mt, m_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
