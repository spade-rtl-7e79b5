// weight_buffer: holds one gathered weight tile, PE_ROWS words of PE_COLS signed
// 8-bit weights (word r = input channel r, byte j = output channel j), between
// Gather_wgt (writes from DRAM) and Load_wgt (reads that shift the rows into the
// PE array, last row first). One write port, one asynchronous read port. The paper
// shows this buffer but gives no size; a single, not double-buffered, tile is this
// design's choice.
module weight_buffer #(
  parameter int unsigned PE_ROWS = 64,
  parameter int unsigned PE_COLS = 64
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(PE_ROWS)-1:0] waddr,
  input  logic [PE_COLS*8-1:0]       wdata,
  input  logic [$clog2(PE_ROWS)-1:0] raddr,
  output logic [PE_COLS*8-1:0]       rdata
);
  logic [PE_COLS*8-1:0] mem [PE_ROWS];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
