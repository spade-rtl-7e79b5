// sync_fifo: single-clock first-in first-out queue used by the rule generator's
// row FIFO chain. DEPTH entries of a WIDTH-bit word; push and pop may happen in the
// same cycle, also on a full FIFO. The head word is visible combinationally on
// `dout` whenever `count` is non-zero. Pushing into a full FIFO (without a pop) or
// popping an empty one is a usage error and is caught by assertions.
// The rule generator's row alignment with FIFOs follows the paper; this circular
// buffer with a separate count is an ordinary implementation of it. Interface:
// push/din, pop/dout, count; `clr` empties it in one cycle.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rp, wp;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign dout = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else if (clr) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) if (push && !clr) mem[wp] <= din;

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   (push && !pop) |-> count < ($clog2(DEPTH+1))'(DEPTH));
endmodule
