// tb_output_buffer: random sequences of accumulate, Copy_psum, bank swap and clear
// operations on BUF_out, mirrored by a two-bank model kept here. Checks that the
// first write to an entry stores, later writes add, copies carry value and valid
// bit into the other bank, and a swap clears the bank being left.
`timescale 1ns/1ps
module tb_output_buffer;
  localparam int D = 16, C = 2;
  logic clk = 0, rst_n = 0, clr_all = 0, swap = 0, acc_en = 0, cp_en = 0, rd_valid;
  logic [3:0] acc_addr = 0, cp_src = 0, cp_dst = 0, rd_addr = 0;
  logic [C*32-1:0] acc_vec = 0, rd_vec;
  always #5 clk = ~clk;
  output_buffer #(.DEPTH(D), .PE_COLS(C)) dut (.*);
  int checks = 0, failures = 0;
  logic [C*32-1:0] m [2][D];
  bit v [2][D];
  int act = 0;
  int n_acc2 = 0, n_cp = 0, n_sw = 0;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++) for (int a = 0; a < D; a++) v[b][a] = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int op = $urandom % 20;
      @(negedge clk);
      acc_en = 0; cp_en = 0; swap = 0; clr_all = 0;
      // check a random read of the active bank
      rd_addr = 4'($urandom);
      #1;
      checks++;
      if (rd_valid != v[act][rd_addr] || (v[act][rd_addr] && rd_vec != m[act][rd_addr])) begin
        failures++; $display("FAIL read %0d", rd_addr);
      end
      if (op < 12) begin
        acc_en = 1; acc_addr = 4'($urandom % 6); acc_vec = {$urandom, $urandom};
      end else if (op < 17) begin
        cp_en = 1; cp_src = 4'($urandom); cp_dst = 4'($urandom);
      end else if (op < 19) begin
        swap = 1;
      end else if (n % 7 == 0) begin
        clr_all = 1;
      end
      @(posedge clk); #1;
      if (clr_all) begin
        act = 0; for (int b = 0; b < 2; b++) for (int a = 0; a < D; a++) v[b][a] = 0;
      end else begin
        if (acc_en) begin
          for (int j = 0; j < C; j++)
            m[act][acc_addr][j*32 +: 32] = (v[act][acc_addr] ? m[act][acc_addr][j*32 +: 32] : 32'd0)
                                           + acc_vec[j*32 +: 32];
          if (v[act][acc_addr]) n_acc2++;
          v[act][acc_addr] = 1;
        end
        if (cp_en) begin m[1-act][cp_dst] = m[act][cp_src]; v[1-act][cp_dst] = v[act][cp_src]; n_cp++; end
        if (swap) begin for (int a = 0; a < D; a++) v[act][a] = 0; act = 1 - act; n_sw++; end
      end
    end
    checks++; if (n_acc2 == 0 || n_cp == 0 || n_sw == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
