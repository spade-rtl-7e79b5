// atm: Active Tile Manager. After rule generation it walks the rule buffer once, in
// input-pillar order, and cuts the layer into active tiles: runs of consecutive
// input pillars [I_s, I_e] whose inputs fit in BUF_in (`in_cap` pillars) and whose
// outputs [O_s, O_e] fit in BUF_out (`out_cap` pillars).
//
// Each cycle it examines one input p against the heads of the nine rule banks
// (banks are sorted, so the rules of p, at most one per bank, are exactly the heads
// whose input index equals p). The largest of their output indices is the Max of
// the paper's tile-manager figure; the Min is the smallest output index at any bank
// head, i.e. the smallest output that any not-yet-processed rule still touches. A
// tile opens with O_s = that Min, so every output below the next tile's O_s is
// final once the current tile is done, and outputs from there up to O_e are the
// partial sums that must be copied over. Adding p to the open tile is allowed when
// both ranges (Range_input, Range_output) stay within the capacities; otherwise the
// tile is written to the tile table and a new one opens at p. The table records,
// per weight, the first rule and the rule count of the tile.
//
// Timing: one input per cycle, `done` one cycle after the last input. `overflow`
// flags a single input whose outputs cannot fit, or more than MAX_TILES tiles. The
// greedy cut and the exact Min definition are this design's choices; the paper
// gives the min/max/range/compare structure and the tile-information table.
module atm
  import spade_pkg::*;
#(
  parameter int unsigned MAX_TILES = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IDX_W-1:0]  n_in,
  input  logic [IDX_W-1:0]  in_cap,
  input  logic [IDX_W-1:0]  out_cap,
  // rule buffer
  input  logic [IDX_W-1:0]  rb_count [KERNEL],
  output logic [IDX_W-1:0]  rb_addr  [KERNEL],
  input  rule_t             rb_q     [KERNEL],
  // tile table
  input  logic [IDX_W-1:0]  tile_idx,
  output tile_t             tile_q,
  output logic [IDX_W-1:0]  n_tiles,
  output logic              overflow,
  output logic              busy,
  output logic              done
);
  localparam int unsigned TW = $clog2(MAX_TILES);

  tile_t              table_mem [MAX_TILES];
  logic               run, open_t;
  logic [IDX_W-1:0]   p;
  logic [IDX_W-1:0]   hp [KERNEL];
  tile_t              cur;

  logic [KERNEL-1:0]  hit, hok;
  logic [IDX_W-1:0]   fmin, omax, new_oe;
  logic               any_hit, fits;

  always_comb begin
    fmin = '1; omax = '0; any_hit = 1'b0;
    for (int w = 0; w < KERNEL; w++) begin
      rb_addr[w] = hp[w];
      hok[w] = hp[w] < rb_count[w];
      hit[w] = hok[w] && rb_q[w].i == p;
      if (hok[w] && rb_q[w].o < fmin) fmin = rb_q[w].o;
      if (hit[w]) begin
        any_hit = 1'b1;
        if (rb_q[w].o > omax) omax = rb_q[w].o;
      end
    end
    new_oe = (!any_hit || cur.o_e > omax) ? cur.o_e : omax;
    fits   = (p - cur.i_s + 1'b1 <= in_cap) && (new_oe - cur.o_s + 1'b1 <= out_cap);
  end

  function automatic tile_t close_tile(tile_t t, logic [IDX_W-1:0] last,
                                       logic [IDX_W-1:0] h [KERNEL]);
    tile_t r = t;
    r.i_e = last;
    for (int w = 0; w < KERNEL; w++) r.wc[w] = h[w] - t.ws[w];
    return r;
  endfunction

  logic         wr_tile;
  tile_t        wr_data;

  always_comb begin
    wr_tile = 1'b0;
    wr_data = close_tile(cur, p - 1'b1, hp);
    if (run && open_t && ((p == n_in) || !fits)) wr_tile = 1'b1;
  end

  always_ff @(posedge clk) if (wr_tile) table_mem[n_tiles[TW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; open_t <= 1'b0; p <= '0; cur <= '0;
      n_tiles <= '0; overflow <= 1'b0; done <= 1'b0;
      for (int w = 0; w < KERNEL; w++) hp[w] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; open_t <= 1'b0; p <= '0; n_tiles <= '0; overflow <= 1'b0;
        for (int w = 0; w < KERNEL; w++) hp[w] <= '0;
      end else if (run) begin
        if (wr_tile) begin
          n_tiles <= n_tiles + 1'b1;
          if (n_tiles >= IDX_W'(MAX_TILES)) overflow <= 1'b1;
        end
        if (p == n_in) begin
          run <= 1'b0; done <= 1'b1; open_t <= 1'b0;
        end else begin
          if (!open_t || !fits) begin
            // open a new tile at p
            open_t  <= 1'b1;
            cur.i_s <= p;
            cur.o_s <= fmin;
            cur.o_e <= any_hit ? omax : fmin;
            for (int w = 0; w < KERNEL; w++) cur.ws[w] <= hp[w];
            if (any_hit && omax - fmin + 1'b1 > out_cap) overflow <= 1'b1;
          end else begin
            cur.o_e <= new_oe;
          end
          for (int w = 0; w < KERNEL; w++) if (hit[w]) hp[w] <= hp[w] + 1'b1;
          p <= p + 1'b1;
        end
      end
    end
  end

  assign tile_q = table_mem[tile_idx[TW-1:0]];
  assign busy   = run;
endmodule
