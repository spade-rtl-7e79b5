// tb_coord_buffer: appends random raster-ordered pillar coordinates and checks, for
// every row, the CPR start index and length and, for every pillar, its column,
// against lists kept here; then writes output coordinates four at a time and reads
// them back. A second fill after `clr` checks that stale rows read as empty.
`timescale 1ns/1ps
module tb_coord_buffer;
  import spade_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, wr_en = 0;
  coord_t wr_coord = '0;
  logic [IDX_W-1:0] n_in, row_start, row_len, rd_idx = 0, oc_raddr = 0;
  logic [COORD_W-1:0] rd_row = 0, col;
  logic [3:0] oc_we = 0;
  logic [IDX_W-1:0] oc_waddr [4];
  coord_t oc_wdata [4], oc_rdata;
  always #5 clk = ~clk;
  coord_buffer #(.MAX_H(32), .P_MAX(1024), .O_MAX(256)) dut (.*);
  int checks = 0, failures = 0;
  int st [32], ln [32], cl [1024];
  coord_t oc_m [256];

  task automatic fill(int dens);
    int p = 0;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int y = 0; y < 32; y++) begin st[y] = 0; ln[y] = 0; end
    for (int y = 0; y < 32; y++) for (int x = 0; x < 40; x++)
      if ($urandom % 100 < dens) begin
        if (ln[y] == 0) st[y] = p;
        ln[y]++; cl[p] = x; p++;
        wr_en = 1; wr_coord = '{y: COORD_W'(y), x: COORD_W'(x)};
        @(negedge clk);
      end
    wr_en = 0;
    @(negedge clk);
    checks++; if (int'(n_in) != p) failures++;
    for (int y = 0; y < 32; y++) begin
      rd_row = COORD_W'(y); #1;
      checks++;
      if (int'(row_len) != ln[y] || (ln[y] > 0 && int'(row_start) != st[y])) begin
        failures++; $display("FAIL row %0d", y);
      end
    end
    for (int i = 0; i < p; i++) begin
      rd_idx = IDX_W'(i); #1; checks++; if (int'(col) != cl[i]) failures++;
    end
  endtask

  initial begin
    for (int k = 0; k < 4; k++) begin oc_waddr[k] = '0; oc_wdata[k] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    fill(30);
    fill(5);
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        oc_waddr[k] = IDX_W'(n * 4 + k);
        oc_wdata[k] = '{y: COORD_W'($urandom), x: COORD_W'($urandom)};
        oc_m[n*4 + k] = oc_wdata[k];
      end
      oc_we = 4'b1111;
    end
    @(negedge clk); oc_we = 0;
    for (int i = 0; i < 256; i++) begin
      oc_raddr = IDX_W'(i); #1; checks++; if (oc_rdata != oc_m[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
