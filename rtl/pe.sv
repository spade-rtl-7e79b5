// pe: one processing element of the weight-stationary systolic array. A signed
// 8-bit weight sits in the local register file (LRF); each cycle the PE multiplies
// the 8-bit input arriving from its left neighbour by that weight, adds the 32-bit
// partial sum arriving from the PE above, and registers both the sum (passed down)
// and the input (passed right). A8-W8-Acc32 precision is the paper's.
//
// Weights are loaded by shifting: while `w_shift` is high the LRF takes `w_in`
// (the LRF of the PE above, or the weight bus for the top row) and `w_out` shows the
// current LRF to the PE below. The paper's PE drawing shows a selector in front of
// the LRF without labelling its inputs; shift-down loading is this design's choice.
module pe (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_shift,
  input  logic signed [7:0]  w_in,
  output logic signed [7:0]  w_out,
  input  logic signed [7:0]  a_in,
  output logic signed [7:0]  a_out,
  input  logic signed [31:0] ps_in,
  output logic signed [31:0] ps_out
);
  logic signed [7:0] lrf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lrf <= '0; a_out <= '0; ps_out <= '0;
    end else begin
      if (w_shift) lrf <= w_in;
      a_out  <= a_in;
      ps_out <= ps_in + 32'(a_in * lrf);
    end
  end

  assign w_out = lrf;
endmodule
