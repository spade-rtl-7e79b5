// tb_pe: checks one processing element: weight shift-in, input pass-through and
// the multiply-accumulate ps_out = ps_in + a_in * weight, one cycle later, against
// products computed here for random signed operands.
`timescale 1ns/1ps
module tb_pe;
  logic clk = 0, rst_n = 0, w_shift = 0;
  logic signed [7:0] w_in = 0, w_out, a_in = 0, a_out;
  logic signed [31:0] ps_in = 0, ps_out;
  always #5 clk = ~clk;
  pe dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic logic signed [7:0] w = 8'($urandom);
      automatic logic signed [7:0] a = 8'($urandom);
      automatic logic signed [31:0] p = 32'($urandom) >>> 8;
      @(negedge clk); w_shift = 1; w_in = w;
      @(negedge clk); w_shift = 0; w_in = 8'($urandom);
      checks++; if (w_out !== w) failures++;
      a_in = a; ps_in = p;
      @(negedge clk);
      checks++; if (ps_out !== p + 32'(a * w)) begin failures++; $display("FAIL mac %0d*%0d+%0d=%0d", a, w, p, ps_out); end
      checks++; if (a_out !== a) failures++;
      checks++; if (w_out !== w) failures++;      // weight held while not shifting
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
