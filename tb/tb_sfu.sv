// tb_sfu: drives random partial-sum vectors (small and large, positive and
// negative) into the special function unit and compares the L1 magnitude, the
// prune decision and the ReLU + shift + saturate outputs with values computed here.
`timescale 1ns/1ps
module tb_sfu;
  localparam int C = 8;
  logic [C*32-1:0] in_vec;
  logic prune_en;
  logic [39:0] threshold, magnitude;
  logic [4:0] shift;
  logic keep;
  logic [C*8-1:0] out_vec;
  sfu #(.PE_COLS(C)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int n = 0; n < 500; n++) begin
      automatic longint mag = 0;
      automatic int v [C];
      for (int j = 0; j < C; j++) begin
        v[j] = (n % 3 == 0) ? int'($urandom) : int'($urandom % 4001) - 2000;
        in_vec[j*32 +: 32] = 32'(v[j]);
        mag += (v[j] < 0) ? -longint'(v[j]) : longint'(v[j]);
      end
      prune_en = $urandom % 2; shift = 5'($urandom % 12);
      threshold = 40'($urandom % 16000);
      #1;
      checks++; if (magnitude != 40'(mag)) begin failures++; $display("FAIL mag"); end
      checks++; if (keep != (!prune_en || mag >= longint'(threshold))) begin failures++; $display("FAIL keep"); end
      for (int j = 0; j < C; j++) begin
        automatic int sh = int'(shift);
        automatic int e = v[j] >>> sh;
        if (v[j] < 0) e = 0;
        if (e > 127) e = 127;
        checks++; if (out_vec[j*8 +: 8] != 8'(e)) begin failures++; $display("FAIL relu %0d sh %0d -> %0d exp %0d", v[j], shift, out_vec[j*8 +: 8], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
