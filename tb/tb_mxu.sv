// tb_mxu: checks the systolic matrix unit (4 rows x 3 columns here): a weight tile
// is shifted in with Load_wgt, then random input vectors are streamed back to back
// (with occasional gaps). Every result vector must equal the matrix-vector product
// computed here, carry its input's tag, and appear exactly ROWS+COLS-1 cycles after
// the input. A second weight tile is then loaded and checked the same way.
`timescale 1ns/1ps
module tb_mxu;
  localparam int R = 4, C = 3, LAT = R + C - 1;
  logic clk = 0, rst_n = 0, wl_en = 0, in_valid = 0, out_valid, busy;
  logic [C*8-1:0] wl_data = 0;
  logic [R*8-1:0] in_vec = 0;
  logic [16:0] in_tag = 0, out_tag;
  logic [C*32-1:0] out_vec;
  always #5 clk = ~clk;
  mxu #(.ROWS(R), .COLS(C), .TAG_W(17)) dut (.*);

  int checks = 0, failures = 0;
  int wt [R][C];
  int cyc = 0;
  always @(posedge clk) cyc++;
  logic [R*8-1:0] sent_v [$];
  int sent_t [$], sent_c [$];
  int n_out = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic logic [R*8-1:0] v = sent_v.pop_front();
    automatic int t = sent_t.pop_front();
    automatic int c0 = sent_c.pop_front();
    n_out++;
    checks++; if (out_tag != 17'(t)) begin failures++; $display("FAIL tag %0d %0d cyc %0d", out_tag, t, cyc); end
    checks++; if (cyc - c0 != LAT) begin failures++; $display("FAIL latency %0d", cyc - c0); end
    for (int j = 0; j < C; j++) begin
      automatic int s = 0;
      for (int r = 0; r < R; r++) s += int'($signed(v[r*8 +: 8])) * wt[r][j];
      checks++;
      if ($signed(out_vec[j*32 +: 32]) != s) begin failures++; $display("FAIL col %0d got %0d exp %0d", j, $signed(out_vec[j*32 +: 32]), s); end
    end
  end

  task automatic load_weights();
    for (int r = 0; r < R; r++) for (int j = 0; j < C; j++) wt[r][j] = int'($signed(8'($urandom)));
    for (int r = R - 1; r >= 0; r--) begin
      @(negedge clk); wl_en = 1;
      for (int j = 0; j < C; j++) wl_data[j*8 +: 8] = 8'(wt[r][j]);
    end
    @(negedge clk); wl_en = 0;
  endtask

  task automatic stream(int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      if ($urandom % 5 == 0) begin in_valid = 0; continue; end
      in_valid = 1; in_vec = R*8'($urandom); in_tag = 17'($urandom);
      for (int r = 0; r < R; r++) in_vec[r*8 +: 8] = 8'($urandom);
      sent_v.push_back(in_vec); sent_t.push_back(int'(in_tag)); sent_c.push_back(cyc + 1);
    end
    @(negedge clk); in_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    load_weights(); stream(60);
    load_weights(); stream(60);
    checks++; if (sent_v.size() != 0 || n_out < 80) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
