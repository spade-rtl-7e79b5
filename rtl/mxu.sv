// mxu: Matrix Unit, a ROWS x COLS weight-stationary systolic array of `pe`. Rows
// carry input channels, columns output channels: for an input pillar vector a and
// the loaded weight tile W it produces ps[j] = sum_r a[r] * W[r][j] (signed 8-bit
// operands, 32-bit sums). The array shape and precision are the paper's; the
// pipeline arrangement below is this design's.
//
// Load_wgt: while `wl_en` is high one weight row (`wl_data`, byte j = column j)
// enters the top of the array per cycle and the rows below shift down; ROWS
// cycles load a tile, rows presented last-row first.
// Compute: one input vector per cycle on `in_valid`/`in_vec`, with a tag (the
// output-buffer offset) that travels alongside. Row r is delayed r cycles on entry
// (skew) and column j by COLS-1-j cycles on exit (de-skew), so the result vector
// appears whole on `out_valid`/`out_vec`/`out_tag` exactly LAT = ROWS+COLS-1 cycles
// after its input. Back-to-back inputs give one result per cycle. `busy` is high
// while any result is still in flight. Weights must not be reloaded while busy.
module mxu #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 64,
  parameter int unsigned TAG_W = 17
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wl_en,
  input  logic [COLS*8-1:0]     wl_data,
  input  logic                  in_valid,
  input  logic [ROWS*8-1:0]     in_vec,
  input  logic [TAG_W-1:0]      in_tag,
  output logic                  out_valid,
  output logic [COLS*32-1:0]    out_vec,
  output logic [TAG_W-1:0]      out_tag,
  output logic                  busy
);
  localparam int unsigned LAT = ROWS + COLS - 1;

  logic signed [7:0]  a_h  [ROWS][COLS+1];   // horizontal input wires
  logic signed [31:0] ps_v [ROWS+1][COLS];   // vertical partial-sum wires
  logic signed [7:0]  w_v  [ROWS+1][COLS];   // vertical weight-load wires

  for (genvar j = 0; j < COLS; j++) begin : g_top
    assign ps_v[0][j] = '0;
    assign w_v[0][j]  = wl_data[j*8 +: 8];
  end

  // input skew: row r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_r0
      assign a_h[0][0] = in_vec[7:0];
    end else begin : g_rn
      logic signed [7:0] sr [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int k = 0; k < r; k++) sr[k] <= '0;
        else begin
          sr[0] <= in_vec[r*8 +: 8];
          for (int k = 1; k < r; k++) sr[k] <= sr[k-1];
        end
      end
      assign a_h[r][0] = sr[r-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      pe u_pe (
        .clk, .rst_n,
        .w_shift(wl_en), .w_in(w_v[r][j]), .w_out(w_v[r+1][j]),
        .a_in(a_h[r][j]), .a_out(a_h[r][j+1]),
        .ps_in(ps_v[r][j]), .ps_out(ps_v[r+1][j]));
    end
  end

  // output de-skew: column j delayed by COLS-1-j cycles
  for (genvar j = 0; j < COLS; j++) begin : g_deskew
    if (j == COLS - 1) begin : g_last
      assign out_vec[j*32 +: 32] = ps_v[ROWS][j];
    end else begin : g_dly
      localparam int unsigned D = COLS - 1 - j;
      logic signed [31:0] sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int k = 0; k < D; k++) sr[k] <= '0;
        else begin
          sr[0] <= ps_v[ROWS][j];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
        end
      end
      assign out_vec[j*32 +: 32] = sr[D-1];
    end
  end

  // tag / valid pipeline
  logic [LAT-1:0]   v_sr;
  logic [TAG_W-1:0] t_sr [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      for (int k = 0; k < LAT; k++) t_sr[k] <= '0;
    end else begin
      v_sr <= {v_sr[LAT-2:0], in_valid};
      t_sr[0] <= in_tag;
      for (int k = 1; k < LAT; k++) t_sr[k] <= t_sr[k-1];
    end
  end
  assign out_valid = v_sr[LAT-1];
  assign out_tag   = t_sr[LAT-1];
  assign busy      = |v_sr;

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         wl_en |-> !busy);
endmodule
