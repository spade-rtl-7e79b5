// dram_model: behavioural model of the off-chip DRAM, for testbenches only. Not
// synthesizable. Word-addressed, DW-bit words held in a sparse associative array
// (unwritten words read as zero). Requests handshake on req_valid/req_ready; when
// `stall_en` is set the model refuses roughly one request in four to exercise
// back-pressure. Reads return in request order, LAT cycles after acceptance, on
// rsp_valid/rsp_rdata. Testbenches preload and inspect `mem` directly.
module dram_model #(
  parameter int unsigned DW  = 512,
  parameter int unsigned AW  = 32,
  parameter int unsigned LAT = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stall_en,
  input  logic          req_valid,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [DW-1:0] req_wdata,
  output logic          req_ready,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_rdata
);
  logic [DW-1:0] mem [longint unsigned];
  logic [DW-1:0] q_data [$];
  longint        q_due  [$];
  longint        now;
  int unsigned   n_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b1;
    end else begin
      req_ready <= !(stall_en && ($urandom % 4 == 0));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; rsp_valid <= 1'b0; rsp_rdata <= '0; n_stall <= 0;
      q_data.delete(); q_due.delete();
    end else begin
      now <= now + 1;
      if (req_valid && !req_ready) n_stall <= n_stall + 1;
      if (req_valid && req_ready) begin
        if (req_we) mem[longint'(req_addr)] = req_wdata;
        else begin
          q_data.push_back(mem.exists(longint'(req_addr)) ? mem[longint'(req_addr)] : '0);
          q_due.push_back(now + LAT);
        end
      end
      rsp_valid <= 1'b0;
      if (q_due.size() > 0 && q_due[0] <= now) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q_data.pop_front();
        void'(q_due.pop_front());
      end
    end
  end
endmodule
