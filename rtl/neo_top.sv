// neo_top: the Neo 3D Gaussian Splatting accelerator with reuse-and-update
// sorting. Three engines share one DRAM port through the memory controller:
//   Preprocessing Engine  - culls and projects every Gaussian, writes the
//                           feature table and the per-tile incoming tables;
//   Sorting Engine        - per tile: Dynamic Partial Sorting of the table
//                           reused from the previous frame, sorting of the
//                           incoming table, merge with insertion and deletion;
//   Rasterization Engine  - per tile: subtile blending, frame-buffer output,
//                           and write-back of depths and valid bits into the
//                           table for the next frame.
// A frame controller runs the three stages in order for one frame per start
// pulse. Tile tables alternate between two regions (TBL0/TBL1): the sort of
// frame F reads the region written in frame F-1 and writes the other, which
// rasterization then renders and updates. Frame numbers start at 1, so the
// first frame uses fixed chunk boundaries and the second the shifted ones.
//
// Memory map (64-bit word addresses, all parameters): 3D Gaussians at
// GAUSS_BASE (GAUSS_WORDS per Gaussian), features at FEAT_BASE (FEAT_WORDS
// per Gaussian, must be zero before the first frame), tile tables at
// TBL0/TBL1 + tile*TBL_CAP, incoming tables at INC_BASE + tile*INC_CAP,
// merge scratch at SCR_BASE + tile*INC_CAP, frame buffer at FB_BASE
// (one word per pixel, row-major). Incoming entries that do not fit in
// TBL_CAP are dropped and counted in tbl_drop.
// Resolution, tile size, unit counts and chunk size are the paper's main
// configuration (QHD, 64x64 tiles, 8x8 subtiles, 16 sorting cores, 4
// rasterization cores of 4 ITU + 4 SCU, 4 preprocessing lanes, 256-entry
// chunks); table capacities, the memory map and the frame controller are this
// design's choices.
// All registers use an asynchronous active-low reset (rst_n). A lint note
// that rst_n is used both asynchronously and synchronously refers only to the
// `disable iff (!rst_n)` of the concurrent assertions, which are checks and
// not circuit, so it stands.
module neo_top
  import neo_pkg::*;
#(
  parameter int SCREEN_W   = 2560,
  parameter int SCREEN_H   = 1440,
  parameter int TILE       = 64,
  parameter int SUBTILE    = 8,
  parameter int NPRE       = 4,
  parameter int NSORT      = 16,
  parameter int NRAST      = 4,
  parameter int CHUNK      = 256,
  parameter int NB         = 256,
  parameter int TBL_CAP    = 8192,
  parameter int INC_CAP    = 8192,
  parameter logic [MEM_AW-1:0] GAUSS_BASE = 32'h0000_0000,
  parameter logic [MEM_AW-1:0] FEAT_BASE  = 32'h0100_0000,
  parameter logic [MEM_AW-1:0] TBL0_BASE  = 32'h0200_0000,
  parameter logic [MEM_AW-1:0] TBL1_BASE  = 32'h0300_0000,
  parameter logic [MEM_AW-1:0] INC_BASE   = 32'h0400_0000,
  parameter logic [MEM_AW-1:0] SCR_BASE   = 32'h0500_0000,
  parameter logic [MEM_AW-1:0] FB_BASE    = 32'h0600_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  camera_t     cam,
  input  logic [31:0] num_gauss,
  output logic        busy,
  output logic        frame_done,
  output logic [15:0] frame_no,
  output logic [31:0] inc_overflow,
  output logic [31:0] tbl_drop,
  output logic [31:0] culled_count,
  output logic        dram_req_valid,
  output mem_req_t    dram_req,
  input  logic        dram_req_ready,
  input  logic        dram_rsp_valid,
  input  logic [MEM_DW-1:0] dram_rsp_data
);
  localparam int GRID_W = (SCREEN_W + TILE - 1) / TILE;
  localparam int GRID_H = (SCREEN_H + TILE - 1) / TILE;
  localparam int NTILES = GRID_W * GRID_H;
  localparam int TW     = $clog2(NTILES);

  typedef enum logic [2:0] {F_IDLE, F_PRE, F_SORT, F_RAST, F_FIN} fstate_t;
  fstate_t fs;

  logic [15:0] tlen [NTILES];
  logic        cur;
  logic [15:0] t, tx, ty, res_cnt, rast_base_cnt;

  // ------------------------------------------------------------------ engines
  logic        pre_start, pre_busy, pre_done;
  logic [15:0] pre_cnt;
  logic     [2:0] m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t [2:0] m_req;
  logic [MEM_DW-1:0] m_rsp_data;

  assign pre_start = (fs == F_IDLE) && start;

  preprocessing_engine #(.NUNITS(NPRE), .TILE(TILE), .NTILES(NTILES), .INC_CAP(INC_CAP)) u_pre (
    .clk, .rst_n, .start(pre_start), .num_gauss, .cam, .gauss_base(GAUSS_BASE),
    .feat_base(FEAT_BASE), .inc_base(INC_BASE), .grid_w(16'(GRID_W)), .grid_h(16'(GRID_H)),
    .cnt_tile(t), .inc_count(pre_cnt), .busy(pre_busy), .done(pre_done),
    .overflow(inc_overflow), .culled_count,
    .req_valid(m_req_valid[0]), .req(m_req[0]), .req_ready(m_req_ready[0]),
    .rsp_valid(m_rsp_valid[0]), .rsp_data(m_rsp_data));

  logic        sj_valid, sj_ready, sr_valid;
  sort_job_t   sj;
  sort_res_t   sr;
  logic        s_idle;
  logic [15:0] room, inc_len;
  assign room    = 16'(TBL_CAP) - tlen[TW'(t)];
  assign inc_len = (pre_cnt > room) ? room : pre_cnt;
  assign sj_valid = (fs == F_SORT) && (int'(t) < NTILES);
  always_comb begin
    sj.tile     = t;
    sj.tbl_base = (cur ? TBL1_BASE : TBL0_BASE) + MEM_AW'(t) * MEM_AW'(TBL_CAP);
    sj.tbl_len  = tlen[TW'(t)];
    sj.inc_base = INC_BASE + MEM_AW'(t) * MEM_AW'(INC_CAP);
    sj.inc_len  = inc_len;
    sj.out_base = (cur ? TBL0_BASE : TBL1_BASE) + MEM_AW'(t) * MEM_AW'(TBL_CAP);
    sj.scr_base = SCR_BASE + MEM_AW'(t) * MEM_AW'(INC_CAP);
    sj.frame    = frame_no;
  end

  sorting_engine #(.NCORES(NSORT), .CHUNK(CHUNK)) u_sort (
    .clk, .rst_n, .job_valid(sj_valid), .job(sj), .job_ready(sj_ready),
    .res_valid(sr_valid), .res(sr), .res_ready(1'b1), .idle(s_idle),
    .req_valid(m_req_valid[1]), .req(m_req[1]), .req_ready(m_req_ready[1]),
    .rsp_valid(m_rsp_valid[1]), .rsp_data(m_rsp_data));

  logic        rj_valid, rj_ready, r_idle;
  rast_job_t   rj;
  logic [15:0] r_done_cnt;
  assign rj_valid   = (fs == F_RAST) && (int'(t) < NTILES);
  assign rj.tile_x  = tx;
  assign rj.tile_y  = ty;
  assign rj.tbl_base = (cur ? TBL0_BASE : TBL1_BASE) + MEM_AW'(t) * MEM_AW'(TBL_CAP);
  assign rj.tbl_len = tlen[TW'(t)];

  rasterization_engine #(.NCORES(NRAST), .TILE(TILE), .SUBTILE(SUBTILE), .NB(NB)) u_rast (
    .clk, .rst_n, .feat_base(FEAT_BASE), .fb_base(FB_BASE),
    .screen_w(16'(SCREEN_W)), .screen_h(16'(SCREEN_H)),
    .job_valid(rj_valid), .job(rj), .job_ready(rj_ready), .done_count(r_done_cnt),
    .idle(r_idle),
    .req_valid(m_req_valid[2]), .req(m_req[2]), .req_ready(m_req_ready[2]),
    .rsp_valid(m_rsp_valid[2]), .rsp_data(m_rsp_data));

  // ------------------------------------------------------------------ memory controller
  mem_arbiter #(.N(3)) u_memctl (
    .clk, .rst_n, .m_req_valid, .m_req, .m_req_ready, .m_rsp_valid, .m_rsp_data,
    .s_req_valid(dram_req_valid), .s_req(dram_req), .s_req_ready(dram_req_ready),
    .s_rsp_valid(dram_rsp_valid), .s_rsp_data(dram_rsp_data));

  // ------------------------------------------------------------------ frame controller
  assign busy = (fs != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs <= F_IDLE; cur <= 1'b0; frame_no <= 16'd1; frame_done <= 1'b0;
      t <= '0; tx <= '0; ty <= '0; res_cnt <= '0; rast_base_cnt <= '0; tbl_drop <= '0;
      for (int i = 0; i < NTILES; i++) tlen[i] <= '0;
    end else begin
      frame_done <= 1'b0;
      case (fs)
        F_IDLE: if (start) fs <= F_PRE;
        F_PRE: if (pre_done) begin
          t <= '0; res_cnt <= '0;
          fs <= F_SORT;
        end
        F_SORT: begin
          if (sj_valid && sj_ready) begin
            tbl_drop <= tbl_drop + 32'(pre_cnt - inc_len);
            t <= t + 1'b1;
          end
          if (sr_valid) begin
            tlen[TW'(sr.tile)] <= sr.out_len;
          end
          if (int'(res_cnt) + int'(sr_valid) == NTILES) begin
            t <= '0; tx <= '0; ty <= '0; rast_base_cnt <= r_done_cnt;
            fs <= F_RAST;
          end
          if (sr_valid) res_cnt <= res_cnt + 1'b1;
        end
        F_RAST: begin
          if (rj_valid && rj_ready) begin
            t <= t + 1'b1;
            if (int'(tx) == GRID_W - 1) begin
              tx <= '0;
              ty <= ty + 1'b1;
            end else begin
              tx <= tx + 1'b1;
            end
          end
          if (int'(16'(r_done_cnt - rast_base_cnt)) == NTILES && r_idle) fs <= F_FIN;
        end
        F_FIN: begin
          cur <= !cur;
          frame_no <= frame_no + 1'b1;
          frame_done <= 1'b1;
          fs <= F_IDLE;
        end
        default: fs <= F_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (fs == F_RAST) |-> s_idle);
  assert property (@(posedge clk) disable iff (!rst_n) (fs == F_SORT) |-> !pre_busy);
endmodule
