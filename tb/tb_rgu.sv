// tb_rgu: the rule generator together with the coordinate buffer. For random sparse
// grids in all five convolution types it collects the rules written to each of the
// nine weight banks and the output coordinates, and compares them with lists built
// here by direct neighbour lookup on a dense grid (no streaming, no merging). It
// also checks that each bank receives its rules in ascending input and output
// order, that the output count matches, and that the run time stays within a
// bound linear in the grid height and the number of pillars.
`timescale 1ns/1ps
module tb_rgu;
  import spade_pkg::*;
  localparam int G = 16, PM = 256, OM = 1024;
  logic clk = 0, rst_n = 0, start = 0, clr = 0, wr_en = 0;
  always #5 clk = ~clk;
  conv_mode_e mode;
  logic [COORD_W-1:0] grid_h, grid_w, cb_row, cb_col;
  logic [IDX_W-1:0] cb_row_start, cb_row_len, cb_idx, n_in, n_out, oc_raddr = 0;
  logic [KERNEL-1:0] rule_we;
  rule_t rule_d [KERNEL];
  logic [3:0] oc_we;
  logic [IDX_W-1:0] oc_waddr [4];
  coord_t oc_wdata [4], oc_rdata, wr_coord;
  logic busy, done;

  coord_buffer #(.MAX_H(G), .P_MAX(PM), .O_MAX(OM)) u_cb (
    .clk, .rst_n, .clr, .wr_en, .wr_coord, .n_in, .rd_row(cb_row), .row_start(cb_row_start),
    .row_len(cb_row_len), .rd_idx(cb_idx), .col(cb_col), .oc_we, .oc_waddr, .oc_wdata,
    .oc_raddr, .oc_rdata);
  rgu #(.MAX_W(G)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // captured from the DUT
  rule_t got [KERNEL][$];
  int got_oy [OM], got_ox [OM];
  always @(posedge clk) begin
    for (int w = 0; w < KERNEL; w++) if (rule_we[w]) got[w].push_back(rule_d[w]);
    for (int k = 0; k < 4; k++)
      if (oc_we[k]) begin got_oy[oc_waddr[k]] = int'(oc_wdata[k].y); got_ox[oc_waddr[k]] = int'(oc_wdata[k].x); end
  end

  // reference
  int occ [G][G];
  int H, W, P;
  rule_t exp_r [KERNEL][$];
  int exp_oy [OM], exp_ox [OM], n_exp;

  task automatic reference(conv_mode_e md);
    int q;
    for (int w = 0; w < KERNEL; w++) exp_r[w].delete();
    n_exp = 0;
    if (md == SPDECONV) begin
      for (int yo = 0; yo < 2*H; yo++)
        for (int xo = 0; xo < 2*W; xo++)
          if (occ[yo/2][xo/2] >= 0) begin
            exp_oy[n_exp] = yo; exp_ox[n_exp] = xo;
            exp_r[(yo%2)*2 + (xo%2)].push_back('{i: IDX_W'(occ[yo/2][xo/2]), o: IDX_W'(n_exp)});
            n_exp++;
          end
    end else begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          bit any = 0;
          if (md == SPSTCONV && (y % 2 || x % 2)) continue;
          if (md == SPCONV_S && occ[y][x] < 0) continue;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              int ys, xs;
              ys = y + dy; xs = x - dx;
              if (ys >= 0 && ys < H && xs >= 0 && xs < W && occ[ys][xs] >= 0) begin
                any = 1;
                exp_r[3*(dy+1) + (dx+1)].push_back('{i: IDX_W'(occ[ys][xs]), o: IDX_W'(n_exp)});
              end
            end
          if (any) begin
            exp_oy[n_exp] = (md == SPSTCONV) ? y/2 : y;
            exp_ox[n_exp] = (md == SPSTCONV) ? x/2 : x;
            n_exp++;
          end
        end
    end
    for (int w = 0; w < KERNEL; w++) exp_r[w].sort() with (item.i);
  endtask

  int m_mode [5];
  task automatic run(conv_mode_e md, int h, int w, int dens);
    int cyc = 0;
    H = h; W = w; P = 0;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int y = 0; y < G; y++) for (int x = 0; x < G; x++) occ[y][x] = -1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      if ($urandom % 100 < dens || P == 0 && y == H-1 && x == W-1) begin
        occ[y][x] = P; P++;
        wr_en = 1; wr_coord = '{y: COORD_W'(y), x: COORD_W'(x)};
        @(negedge clk);
      end
    wr_en = 0;
    reference(md);
    for (int k = 0; k < KERNEL; k++) got[k].delete();
    mode = md; grid_h = COORD_W'(H); grid_w = COORD_W'(W);
    start = 1; @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; check(cyc < 100000, "timeout"); if (cyc >= 100000) break; end
    check(int'(n_out) == n_exp, $sformatf("mode %0d n_out %0d exp %0d", md, n_out, n_exp));
    for (int k = 0; k < KERNEL; k++) begin
      check(got[k].size() == exp_r[k].size(),
            $sformatf("mode %0d bank %0d size %0d exp %0d", md, k, got[k].size(), exp_r[k].size()));
      for (int j = 0; j < got[k].size() && j < exp_r[k].size(); j++)
        check(got[k][j] == exp_r[k][j], $sformatf("mode %0d bank %0d rule %0d", md, k, j));
      for (int j = 1; j < got[k].size(); j++)
        check(got[k][j].i > got[k][j-1].i && got[k][j].o > got[k][j-1].o, "bank order");
    end
    for (int q = 0; q < n_exp; q++)
      check(got_oy[q] == exp_oy[q] && got_ox[q] == exp_ox[q], $sformatf("mode %0d coord %0d", md, q));
    check(cyc <= 5*(H+2) + 4*P + 8, $sformatf("cycles %0d for H=%0d P=%0d", cyc, H, P));
    if (n_exp > 0) m_mode[md]++;
  endtask

  initial begin
    for (int k = 0; k < 5; k++) m_mode[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      automatic conv_mode_e md = conv_mode_e'(n % 5);
      automatic int hh = 1 + $urandom % G; automatic int ww = 1 + $urandom % G;
      if (md == SPDECONV) begin hh = 1 + $urandom % (G/2); ww = 1 + $urandom % (G/2); end
      run(md, hh, ww, 5 + $urandom % 60);
    end
    run(SPCONV, G, G, 100);
    run(SPCONV, G, G, 1);
    for (int k = 0; k < 5; k++) check(m_mode[k] > 0, "mode not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
