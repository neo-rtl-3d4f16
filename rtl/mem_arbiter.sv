// mem_arbiter: round-robin arbiter that merges N memory masters onto one
// memory port. It is the Memory Controller between the engines and DRAM, and
// also joins the cores inside the sorting, rasterization and preprocessing
// engines.
//
// One request is granted per cycle. For each granted read the master index is
// put in a FIFO (OUTST deep); read responses, which the memory returns in
// request order, are steered to the master at the head of that FIFO. Reads are
// held back while the FIFO is full. Response data go to every master
// (m_rsp_data); only m_rsp_valid[i] is per master. The paper only names the
// memory controller; its arbitration policy is this design's choice.
module mem_arbiter
  import neo_pkg::*;
#(
  parameter int N     = 3,
  parameter int OUTST = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [N-1:0]     m_req_valid,
  input  mem_req_t [N-1:0]     m_req,
  output logic     [N-1:0]     m_req_ready,
  output logic     [N-1:0]     m_rsp_valid,
  output logic [MEM_DW-1:0]    m_rsp_data,
  output logic                 s_req_valid,
  output mem_req_t             s_req,
  input  logic                 s_req_ready,
  input  logic                 s_rsp_valid,
  input  logic [MEM_DW-1:0]    s_rsp_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr, gnt;
  logic          gnt_any;
  logic          tag_full, tag_empty;
  logic [IW-1:0] tag_head;

  always_comb begin
    gnt_any = 1'b0;
    gnt     = '0;
    for (int k = 0; k < N; k++) begin
      int idx;
      idx = (int'(ptr) + k) % N;
      if (!gnt_any && m_req_valid[idx] && (m_req[idx].we || !tag_full)) begin
        gnt_any = 1'b1;
        gnt     = IW'(idx);
      end
    end
  end

  assign s_req_valid = gnt_any;
  assign s_req       = m_req[gnt];

  always_comb begin
    m_req_ready = '0;
    if (gnt_any && s_req_ready) m_req_ready[gnt] = 1'b1;
  end

  logic issue_rd;
  assign issue_rd = gnt_any && s_req_ready && !m_req[gnt].we;

  sync_fifo #(.W(IW), .DEPTH(OUTST)) u_tags (
    .clk, .rst_n, .push(issue_rd), .wr_data(gnt), .pop(s_rsp_valid),
    .rd_data(tag_head), .full(tag_full), .empty(tag_empty));

  always_comb begin
    m_rsp_valid = '0;
    if (s_rsp_valid) m_rsp_valid[tag_head] = 1'b1;
  end
  assign m_rsp_data = s_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (gnt_any && s_req_ready) ptr <= (gnt == IW'(N-1)) ? '0 : gnt + 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_rsp_valid |-> !tag_empty);
endmodule
