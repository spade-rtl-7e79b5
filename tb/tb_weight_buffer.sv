// tb_weight_buffer: writes random words to random addresses of the weight buffer, keeps a copy
// here, and checks every read against the copy (asynchronous read, write visible
// on the next cycle).
`timescale 1ns/1ps
module tb_weight_buffer;
  localparam int D = 32, WD = 64;
  logic clk = 0, we = 0;
  logic [$clog2(D)-1:0] waddr = 0, raddr = 0;
  logic [WD-1:0] wdata = 0, rdata;
  always #5 clk = ~clk;
  weight_buffer #(.PE_ROWS(D), .PE_COLS(WD/8)) dut (.*);
  int checks = 0, failures = 0;
  logic [WD-1:0] model [D];
  bit written [D];
  initial begin
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = $urandom % D; wdata = {$urandom, $urandom};
      raddr = $urandom % D;
      #1;
      if (written[raddr]) begin checks++; if (rdata !== model[raddr]) failures++; end
      @(posedge clk); #1;
      if (we) begin model[waddr] = wdata; written[waddr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
