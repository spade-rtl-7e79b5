// tb_atm: the active tile manager fed from a rule buffer that this bench fills with
// rules built by direct neighbour lookup on random sparse grids. With random
// BUF_in / BUF_out capacities it reads back the tile table and checks the tiling
// properties one by one: tiles cover every input exactly once and in order, both
// ranges respect the capacities, each tile's per-bank rule window holds exactly
// the rules of its inputs and their outputs lie inside [O_s, O_e], O_s is the
// smallest output still touched by any later rule, O_e is the largest output of
// the tile, and each tile is maximal (adding the next input would break a
// capacity). A capacity too small for one input must raise `overflow`.
`timescale 1ns/1ps
module tb_atm;
  import spade_pkg::*;
  localparam int G = 16, PM = 256;
  logic clk = 0, rst_n = 0, start = 0, clr = 0;
  always #5 clk = ~clk;
  logic [KERNEL-1:0] we = '0;
  rule_t wdata [KERNEL], rb_q [KERNEL], cu_q;
  logic [IDX_W-1:0] rb_count [KERNEL], rb_addr [KERNEL];
  logic [IDX_W-1:0] n_in, in_cap, out_cap, tile_idx = 0, n_tiles;
  tile_t tile_q;
  logic overflow, busy, done;

  rule_buffer #(.RULE_DEPTH(PM)) u_rb (
    .clk, .rst_n, .clr, .we, .wdata, .count(rb_count), .atm_addr(rb_addr), .atm_q(rb_q),
    .cu_bank(4'd0), .cu_addr('0), .cu_q);
  atm #(.MAX_TILES(PM)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  rule_t rl [KERNEL][$];
  int occ [G][G];
  int P, NO;

  task automatic make(int h, int w, int dens);
    int cnt_o = 0;
    P = 0;
    for (int k = 0; k < KERNEL; k++) rl[k].delete();
    for (int y = 0; y < G; y++) for (int x = 0; x < G; x++) occ[y][x] = -1;
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
      if ($urandom % 100 < dens || P == 0 && y == h-1 && x == w-1) begin occ[y][x] = P; P++; end
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      bit any = 0;
      for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++) begin
        int ys, xs;
        ys = y + dy; xs = x - dx;
        if (ys >= 0 && ys < h && xs >= 0 && xs < w && occ[ys][xs] >= 0) begin
          any = 1; rl[3*(dy+1)+(dx+1)].push_back('{i: IDX_W'(occ[ys][xs]), o: IDX_W'(cnt_o)});
        end
      end
      if (any) cnt_o++;
    end
    NO = cnt_o;
    for (int k = 0; k < KERNEL; k++) rl[k].sort() with (item.i);
    // load the rule buffer, one rule per bank per cycle
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int j = 0; j < PM; j++) begin
      bit more = 0;
      for (int k = 0; k < KERNEL; k++) begin
        we[k] = j < rl[k].size();
        if (we[k]) begin wdata[k] = rl[k][j]; more = 1; end
      end
      if (!more) break;
      @(negedge clk);
    end
    we = '0;
  endtask

  int m_multi = 0, m_incut = 0, m_outcut = 0, m_ovf = 0;
  task automatic run(int icap, int ocap);
    int cyc = 0, nt, nxt_is;
    int nxt_ws [KERNEL];
    in_cap = IDX_W'(icap); out_cap = IDX_W'(ocap); n_in = IDX_W'(P);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    check(cyc <= P + 2, $sformatf("cycles %0d P %0d", cyc, P));
    if (overflow) begin m_ovf++; return; end
    nt = int'(n_tiles);
    if (nt > 1) m_multi++;
    nxt_is = 0;
    for (int k = 0; k < KERNEL; k++) nxt_ws[k] = 0;
    for (int t = 0; t < nt; t++) begin
      int is, ie, os, oe, omax, omin_later, nxt_omax;
      bit nxt_hit;
      tile_idx = IDX_W'(t); #1;
      is = int'(tile_q.i_s); ie = int'(tile_q.i_e); os = int'(tile_q.o_s); oe = int'(tile_q.o_e);
      check(is == nxt_is && ie >= is, $sformatf("tile %0d input range [%0d,%0d]", t, is, ie));
      check(ie - is + 1 <= icap, "input capacity");
      check(oe - os + 1 <= ocap, "output capacity");
      omax = -1; omin_later = 1 << 30;
      for (int k = 0; k < KERNEL; k++) begin
        check(int'(tile_q.ws[k]) == nxt_ws[k], $sformatf("tile %0d bank %0d window start", t, k));
        for (int j = 0; j < rl[k].size(); j++) begin
          bit in_win = (j >= int'(tile_q.ws[k]) && j < int'(tile_q.ws[k]) + int'(tile_q.wc[k]));
          bit mine = (int'(rl[k][j].i) >= is && int'(rl[k][j].i) <= ie);
          check(in_win == mine, $sformatf("tile %0d bank %0d rule %0d membership", t, k, j));
          if (mine) begin
            check(int'(rl[k][j].o) >= os && int'(rl[k][j].o) <= oe, "rule output inside tile");
            if (int'(rl[k][j].o) > omax) omax = int'(rl[k][j].o);
          end
          if (int'(rl[k][j].i) >= is && int'(rl[k][j].o) < omin_later) omin_later = int'(rl[k][j].o);
        end
        nxt_ws[k] = int'(tile_q.ws[k]) + int'(tile_q.wc[k]);
      end
      check(oe == omax, $sformatf("tile %0d O_e %0d max %0d", t, oe, omax));
      check(os == omin_later, $sformatf("tile %0d O_s %0d min %0d", t, os, omin_later));
      // maximality
      if (ie + 1 < P) begin
        nxt_omax = oe;
        for (int k = 0; k < KERNEL; k++)
          foreach (rl[k][j]) if (int'(rl[k][j].i) == ie + 1 && int'(rl[k][j].o) > nxt_omax) nxt_omax = int'(rl[k][j].o);
        check(ie + 2 - is > icap || nxt_omax - os + 1 > ocap, $sformatf("tile %0d not maximal", t));
        if (ie + 2 - is > icap) m_incut++; else m_outcut++;
      end
      nxt_is = ie + 1;
    end
    check(nxt_is == P, "tiles cover all inputs");
    for (int k = 0; k < KERNEL; k++) check(nxt_ws[k] == rl[k].size(), "all rules in tiles");
  endtask

  initial begin
    for (int k = 0; k < KERNEL; k++) wdata[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      make(1 + $urandom % G, 1 + $urandom % G, 5 + $urandom % 70);
      run(2 + $urandom % 40, 2*G + 2 + $urandom % 60);
      run(P + 1, NO + 1);
    end
    make(G, G, 100);
    run(64, 2*G + 3);     // one input of a full grid spans 2 rows + 3 outputs: fits
    run(64, 8);            // cannot fit -> overflow
    check(m_ovf == 1 && m_multi > 0 && m_incut > 0 && m_outcut > 0,
          $sformatf("mechanisms ovf=%0d multi=%0d incut=%0d outcut=%0d", m_ovf, m_multi, m_incut, m_outcut));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
