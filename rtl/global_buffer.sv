// global_buffer: BUF_in, the on-chip buffer of gathered input pillars. Each word is
// one slice of PE_ROWS input channels of one pillar (8 bits per channel). The
// gather control writes the pillars of the current active tile at
// (pillar index - I_s) * CT + channel tile, and the compute control reads them back
// at the same offset when a rule names the pillar. One write port and one
// asynchronous read port. The default of 512 words x 64 bytes is the paper's 32 KB
// BUF_in; the word layout is this design's.
module global_buffer #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
