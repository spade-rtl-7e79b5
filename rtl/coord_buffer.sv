// coord_buffer: the coordinate buffer of the accelerator. It holds the active input
// pillars of one layer in compressed-pillar-row (CPR) form, and the coordinates of
// the output pillars the rule generator creates.
//
// Input side: after `clr`, pillar coordinates are appended one per cycle (`wr_en`)
// in raster order (row-major, ascending column), so pillar index = arrival order.
// While filling, the buffer records for every row the index of its first pillar and
// the number of pillars in it; together with the column list this is the CPR form
// (the paper's CPR is "similar to compressed sparse row"; the exact layout, a start
// and a length per row, is this design's choice). Rows that never receive a pillar
// read back with length 0 thanks to a per-row flag that `clr` clears at once.
// Read ports are asynchronous: `rd_row` -> `row_start`/`row_len`, `rd_idx` -> `col`.
//
// Output side: up to four output coordinates per cycle are written by the rule
// generator (`oc_we`), and read back by index (`oc_raddr` -> `oc_rdata`) when the
// output pillars are scattered.
module coord_buffer
  import spade_pkg::*;
#(
  parameter int unsigned MAX_H = 512,     // rows of the largest input grid
  parameter int unsigned P_MAX = 16384,   // input pillars per layer
  parameter int unsigned O_MAX = 65536    // output pillars per layer
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  // append input pillars
  input  logic                 wr_en,
  input  coord_t               wr_coord,
  output logic [IDX_W-1:0]     n_in,
  // CPR reads
  input  logic [COORD_W-1:0]   rd_row,
  output logic [IDX_W-1:0]     row_start,
  output logic [IDX_W-1:0]     row_len,
  input  logic [IDX_W-1:0]     rd_idx,
  output logic [COORD_W-1:0]   col,
  // output coordinates
  input  logic [3:0]           oc_we,
  input  logic [IDX_W-1:0]     oc_waddr [4],
  input  coord_t               oc_wdata [4],
  input  logic [IDX_W-1:0]     oc_raddr,
  output coord_t               oc_rdata
);
  localparam int unsigned RW = $clog2(MAX_H);
  localparam int unsigned PW = $clog2(P_MAX);
  localparam int unsigned OW = $clog2(O_MAX);

  logic [COORD_W-1:0] col_mem   [P_MAX];
  logic [IDX_W-1:0]   start_mem [MAX_H];
  logic [IDX_W-1:0]   len_mem   [MAX_H];
  logic [MAX_H-1:0]   seen;
  coord_t             oc_mem    [O_MAX];

  logic [RW-1:0] wy;
  assign wy = wr_coord.y[RW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_in <= '0;
      seen <= '0;
    end else if (clr) begin
      n_in <= '0;
      seen <= '0;
    end else if (wr_en) begin
      n_in     <= n_in + 1'b1;
      seen[wy] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clr) begin
      col_mem[n_in[PW-1:0]] <= wr_coord.x;
      if (!seen[wy]) begin
        start_mem[wy] <= n_in;
        len_mem[wy]   <= IDX_W'(1);
      end else begin
        len_mem[wy]   <= len_mem[wy] + 1'b1;
      end
    end
    for (int k = 0; k < 4; k++)
      if (oc_we[k]) oc_mem[oc_waddr[k][OW-1:0]] <= oc_wdata[k];
  end

  logic row_ok;
  assign row_ok    = (rd_row < COORD_W'(MAX_H)) && seen[rd_row[RW-1:0]];
  assign row_start = row_ok ? start_mem[rd_row[RW-1:0]] : '0;
  assign row_len   = row_ok ? len_mem[rd_row[RW-1:0]]   : '0;
  assign col       = col_mem[rd_idx[PW-1:0]];
  assign oc_rdata  = oc_mem[oc_raddr[OW-1:0]];

  // Coordinates must arrive in raster order; a row, once left, is not revisited.
  coord_t last_c;
  always_ff @(posedge clk) if (wr_en) last_c <= wr_coord;
  a_raster: assert property (@(posedge clk) disable iff (!rst_n || clr)
      (wr_en && n_in != 0) |-> (wr_coord.y > last_c.y) ||
                               (wr_coord.y == last_c.y && wr_coord.x > last_c.x));
endmodule
