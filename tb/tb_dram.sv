// tb_dram: behavioural model of the off-chip DRAM for the testbenches (not
// part of the design). A sparse array of 64-bit words that reads as zero where
// nothing was written. It accepts one request per cycle, refuses requests at
// random STALL percent of cycles to create back-pressure, and returns read
// data in request order LAT cycles after the request was taken.
module tb_dram
  import neo_pkg::*;
#(
  parameter int LAT   = 4,
  parameter int STALL = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  mem_req_t    req,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [MEM_DW-1:0] rsp_data
);
  logic [MEM_DW-1:0] mem [logic [MEM_AW-1:0]];
  logic [MEM_DW-1:0] q_data [$];
  longint            q_due  [$];
  longint            now;
  longint            n_reads, n_writes;

  function automatic logic [MEM_DW-1:0] peek(input logic [MEM_AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    req_ready <= (STALL == 0) ? 1'b1 : (($urandom % 100) >= STALL);
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; rsp_valid <= 1'b0; rsp_data <= '0; n_reads <= 0; n_writes <= 0;
      q_data.delete(); q_due.delete();
    end else begin
      now <= now + 1;
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.addr] = req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          q_data.push_back(peek(req.addr));
          q_due.push_back(now + LAT);
          n_reads <= n_reads + 1;
        end
      end
      if (q_due.size() > 0 && q_due[0] <= now) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q_data.pop_front();
        void'(q_due.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
