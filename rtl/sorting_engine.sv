// sorting_engine: NCORES Sorting Cores working on different tiles at once.
//
// Tile jobs arrive on job_valid/job_ready and are handed to the lowest-numbered
// idle core. When a core finishes, its result (tile number and new table
// length) is held until it is sent on res_valid/res_ready; results from
// several cores are sent in round-robin order. The cores share one memory
// port through a round-robin mem_arbiter. The core count (16) is the paper's;
// dispatch and result ordering are this design's choice.
module sorting_engine
  import neo_pkg::*;
#(
  parameter int NCORES = 16,
  parameter int CHUNK  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        job_valid,
  input  sort_job_t   job,
  output logic        job_ready,
  output logic        res_valid,
  output sort_res_t   res,
  input  logic        res_ready,
  output logic        idle,
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data
);
  localparam int IW = (NCORES > 1) ? $clog2(NCORES) : 1;

  logic [NCORES-1:0] c_job_valid, c_job_ready, c_done, held;
  sort_res_t         c_res  [NCORES];
  sort_res_t         held_res [NCORES];
  logic     [NCORES-1:0] c_req_valid, c_req_ready, c_rsp_valid;
  mem_req_t [NCORES-1:0] c_req;
  logic [MEM_DW-1:0] c_rsp_data;

  // dispatch to the lowest idle core
  always_comb begin
    logic found;
    found = 1'b0;
    c_job_valid = '0;
    for (int i = 0; i < NCORES; i++) begin
      if (!found && c_job_ready[i] && !held[i]) begin
        found = 1'b1;
        c_job_valid[i] = job_valid;
      end
    end
    job_ready = found;
  end

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    sorting_core #(.CHUNK(CHUNK)) u_core (
      .clk, .rst_n, .job_valid(c_job_valid[i]), .job, .job_ready(c_job_ready[i]),
      .done(c_done[i]), .res(c_res[i]),
      .req_valid(c_req_valid[i]), .req(c_req[i]), .req_ready(c_req_ready[i]),
      .rsp_valid(c_rsp_valid[i]), .rsp_data(c_rsp_data));
  end

  // result collection
  logic [IW-1:0] rptr, rsel;
  logic          rany;
  always_comb begin
    rany = 1'b0;
    rsel = '0;
    for (int k = 0; k < NCORES; k++) begin
      int idx;
      idx = (int'(rptr) + k) % NCORES;
      if (!rany && held[idx]) begin
        rany = 1'b1;
        rsel = IW'(idx);
      end
    end
  end
  assign res_valid = rany;
  assign res       = held_res[rsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= '0;
      rptr <= '0;
    end else begin
      for (int i = 0; i < NCORES; i++) begin
        if (c_done[i]) begin
          held[i]     <= 1'b1;
          held_res[i] <= c_res[i];
        end
      end
      if (rany && res_ready) begin
        held[rsel] <= 1'b0;
        rptr <= (rsel == IW'(NCORES-1)) ? '0 : rsel + 1'b1;
      end
    end
  end

  assign idle = (&c_job_ready) && !(|held);

  mem_arbiter #(.N(NCORES)) u_arb (
    .clk, .rst_n, .m_req_valid(c_req_valid), .m_req(c_req), .m_req_ready(c_req_ready),
    .m_rsp_valid(c_rsp_valid), .m_rsp_data(c_rsp_data),
    .s_req_valid(req_valid), .s_req(req), .s_req_ready(req_ready),
    .s_rsp_valid(rsp_valid), .s_rsp_data(rsp_data));
endmodule
