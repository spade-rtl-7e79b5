// rule_buffer: the nine rule banks, one per 3x3 kernel weight, organised by weight
// for weight-stationary execution. Each bank is an append-only list of rules
// (input index, output index); the rule generator writes at most one rule per bank
// per cycle, and since it emits them in ascending order every bank ends up sorted
// by both input and output index. `clr` empties all banks.
//
// Reads are asynchronous. Nine parallel ports (`atm_addr` -> `atm_q`) let the active
// tile manager look at the head of every bank at once; one more port (`cu_bank`,
// `cu_addr` -> `cu_q`) feeds the compute control while the MXU streams a bank.
// `count` gives the number of rules in each bank. The depth is this design's
// choice: every input pillar contributes at most one rule per weight, so a depth of
// the maximum pillar count never overflows (an assertion checks it).
module rule_buffer
  import spade_pkg::*;
#(
  parameter int unsigned RULE_DEPTH = 16384
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic [KERNEL-1:0]  we,
  input  rule_t              wdata [KERNEL],
  output logic [IDX_W-1:0]   count [KERNEL],
  input  logic [IDX_W-1:0]   atm_addr [KERNEL],
  output rule_t              atm_q [KERNEL],
  input  logic [3:0]         cu_bank,
  input  logic [IDX_W-1:0]   cu_addr,
  output rule_t              cu_q
);
  localparam int unsigned AW = $clog2(RULE_DEPTH);

  rule_t mem [KERNEL][RULE_DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < KERNEL; w++) count[w] <= '0;
    end else if (clr) begin
      for (int w = 0; w < KERNEL; w++) count[w] <= '0;
    end else begin
      for (int w = 0; w < KERNEL; w++)
        if (we[w]) count[w] <= count[w] + 1'b1;
    end
  end

  always_ff @(posedge clk)
    for (int w = 0; w < KERNEL; w++)
      if (we[w] && !clr) mem[w][count[w][AW-1:0]] <= wdata[w];

  always_comb begin
    for (int w = 0; w < KERNEL; w++) atm_q[w] = mem[w][atm_addr[w][AW-1:0]];
    cu_q = mem[(cu_bank < 4'(KERNEL)) ? cu_bank : 4'd0][cu_addr[AW-1:0]];
  end

  for (genvar w = 0; w < KERNEL; w++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                    we[w] |-> count[w] < IDX_W'(RULE_DEPTH));
    a_sorted: assert property (@(posedge clk) disable iff (!rst_n || clr)
        (we[w] && count[w] != 0) |->
          wdata[w].i > mem[w][count[w][AW-1:0] - 1'b1].i &&
          wdata[w].o > mem[w][count[w][AW-1:0] - 1'b1].o);
  end
endmodule
