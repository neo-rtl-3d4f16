// sync_fifo: small synchronous FIFO used for the local input and output
// buffers of the merge unit and the request bookkeeping of the memory
// arbiter. Show-ahead: rd_data is the head entry whenever !empty. A push and
// a pop may happen in the same cycle. Depth must be a power of two.
module sync_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  cnt;
  logic [AW-1:0] rp, wp;

  assign full    = (cnt == (AW+1)'(DEPTH));
  assign empty   = (cnt == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; rp <= '0; wp <= '0;
    end else begin
      if (push && !full) begin
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) begin
        rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      end
      cnt <= cnt + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= wr_data;
  end

  // pushing into a full or popping an empty FIFO is a caller error
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
