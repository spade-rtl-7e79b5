// output_buffer: BUF_out with its partial-sum accumulator. Two banks of DEPTH
// entries, each a vector of PE_COLS 32-bit partial sums; one bank is active (the
// tile being computed), the other receives the carried-over partial sums.
//
//  * Accumulate (`acc_en`, `acc_addr`, `acc_vec`): the active bank entry becomes
//    entry + vector, or just the vector if the entry has not been written since the
//    bank was cleared (a valid bit per entry replaces a clearing pass).
//  * Copy_psum (`cp_en`, `cp_src`, `cp_dst`): one active-bank entry per cycle is
//    copied, with its valid bit, into the other bank.
//  * Scatter read (`rd_addr` -> `rd_vec`, `rd_valid`): asynchronous read of the
//    active bank.
//  * `swap` makes the other bank active and clears the valid bits of the bank being
//    left; `clr_all` clears both banks' valid bits.
// The two banks, the accumulator and the copy path are the paper's; the depth, the
// valid bits and the port set are this design's choices. Addresses are offsets
// (output index - O_s) given by the compute and scatter control.
module output_buffer #(
  parameter int unsigned DEPTH   = 1024,
  parameter int unsigned PE_COLS = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr_all,
  input  logic                      swap,
  input  logic                      acc_en,
  input  logic [$clog2(DEPTH)-1:0]  acc_addr,
  input  logic [PE_COLS*32-1:0]     acc_vec,
  input  logic                      cp_en,
  input  logic [$clog2(DEPTH)-1:0]  cp_src,
  input  logic [$clog2(DEPTH)-1:0]  cp_dst,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic [PE_COLS*32-1:0]     rd_vec,
  output logic                      rd_valid
);
  logic [PE_COLS*32-1:0] mem [2][DEPTH];
  logic [DEPTH-1:0]      vld [2];
  logic                  act;

  logic [PE_COLS*32-1:0] sum;
  always_comb begin
    for (int j = 0; j < PE_COLS; j++)
      sum[j*32 +: 32] = (vld[act][acc_addr] ? mem[act][acc_addr][j*32 +: 32] : 32'd0)
                        + acc_vec[j*32 +: 32];
  end

  always_ff @(posedge clk) begin
    if (acc_en) mem[act][acc_addr]  <= sum;
    if (cp_en)  mem[!act][cp_dst]   <= mem[act][cp_src];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; vld[0] <= '0; vld[1] <= '0;
    end else if (clr_all) begin
      act <= 1'b0; vld[0] <= '0; vld[1] <= '0;
    end else begin
      if (acc_en) vld[act][acc_addr] <= 1'b1;
      if (cp_en)  vld[!act][cp_dst]  <= vld[act][cp_src];
      if (swap) begin
        act      <= !act;
        vld[act] <= '0;
      end
    end
  end

  assign rd_vec   = mem[act][rd_addr];
  assign rd_valid = vld[act][rd_addr];

  a_no_mixed: assert property (@(posedge clk) disable iff (!rst_n)
                               swap |-> !acc_en && !cp_en);
endmodule
