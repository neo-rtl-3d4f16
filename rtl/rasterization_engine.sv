// rasterization_engine: NCORES Rasterization Cores rendering different tiles
// at once. Tile jobs arrive on job_valid/job_ready and go to the
// lowest-numbered idle core; tile_done pulses once per finished tile (several
// cores finishing together are counted through done_count). The cores share
// one memory port through a round-robin mem_arbiter. The core count (4) is the
// paper's; dispatch is this design's choice.
module rasterization_engine
  import neo_pkg::*;
#(
  parameter int NCORES  = 4,
  parameter int TILE    = 64,
  parameter int SUBTILE = 8,
  parameter int NB      = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [MEM_AW-1:0] feat_base,
  input  logic [MEM_AW-1:0] fb_base,
  input  logic [15:0] screen_w,
  input  logic [15:0] screen_h,
  input  logic        job_valid,
  input  rast_job_t   job,
  output logic        job_ready,
  output logic [15:0] done_count,
  output logic        idle,
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data
);
  logic     [NCORES-1:0] c_job_valid, c_job_ready, c_done;
  logic     [NCORES-1:0] c_req_valid, c_req_ready, c_rsp_valid;
  mem_req_t [NCORES-1:0] c_req;
  logic [MEM_DW-1:0] c_rsp_data;

  always_comb begin
    logic found;
    found = 1'b0;
    c_job_valid = '0;
    for (int i = 0; i < NCORES; i++) begin
      if (!found && c_job_ready[i]) begin
        found = 1'b1;
        c_job_valid[i] = job_valid;
      end
    end
    job_ready = found;
  end

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    rasterization_core #(.TILE(TILE), .SUBTILE(SUBTILE), .NB(NB)) u_core (
      .clk, .rst_n, .feat_base, .fb_base, .screen_w, .screen_h,
      .job_valid(c_job_valid[i]), .job, .job_ready(c_job_ready[i]), .done(c_done[i]),
      .req_valid(c_req_valid[i]), .req(c_req[i]), .req_ready(c_req_ready[i]),
      .rsp_valid(c_rsp_valid[i]), .rsp_data(c_rsp_data));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_count <= '0;
    else        done_count <= done_count + 16'($countones(c_done));
  end

  assign idle = &c_job_ready;

  mem_arbiter #(.N(NCORES)) u_arb (
    .clk, .rst_n, .m_req_valid(c_req_valid), .m_req(c_req), .m_req_ready(c_req_ready),
    .m_rsp_valid(c_rsp_valid), .m_rsp_data(c_rsp_data),
    .s_req_valid(req_valid), .s_req(req), .s_req_ready(req_ready),
    .s_rsp_valid(rsp_valid), .s_rsp_data(rsp_data));
endmodule
