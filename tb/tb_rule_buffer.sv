// tb_rule_buffer: appends ascending rules to random subsets of the nine banks
// (several banks per cycle), then checks each bank's count and reads every entry
// back through both the nine tile-manager ports and the compute port.
`timescale 1ns/1ps
module tb_rule_buffer;
  import spade_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [KERNEL-1:0] we = '0;
  rule_t wdata [KERNEL];
  logic [IDX_W-1:0] count [KERNEL];
  logic [IDX_W-1:0] atm_addr [KERNEL];
  rule_t atm_q [KERNEL];
  logic [3:0] cu_bank = 0;
  logic [IDX_W-1:0] cu_addr = 0;
  rule_t cu_q;
  always #5 clk = ~clk;
  rule_buffer #(.RULE_DEPTH(256)) dut (.*);
  int checks = 0, failures = 0;
  rule_t mdl [KERNEL][$];
  int li [KERNEL], lo [KERNEL];
  initial begin
    for (int w = 0; w < KERNEL; w++) begin wdata[w] = '0; atm_addr[w] = '0; li[w] = 0; lo[w] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      for (int w = 0; w < KERNEL; w++) begin
        we[w] = $urandom % 2;
        if (we[w]) begin
          li[w] += 1 + $urandom % 3; lo[w] += 1 + $urandom % 4;
          wdata[w] = '{i: IDX_W'(li[w]), o: IDX_W'(lo[w])};
          mdl[w].push_back(wdata[w]);
        end
      end
    end
    @(negedge clk); we = '0;
    for (int w = 0; w < KERNEL; w++) begin
      checks++; if (int'(count[w]) != mdl[w].size()) failures++;
      for (int k = 0; k < mdl[w].size(); k++) begin
        atm_addr[w] = IDX_W'(k); cu_bank = 4'(w); cu_addr = IDX_W'(k); #1;
        checks += 2;
        if (atm_q[w] != mdl[w][k]) failures++;
        if (cu_q != mdl[w][k]) failures++;
      end
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; #1;
    for (int w = 0; w < KERNEL; w++) begin checks++; if (count[w] != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
