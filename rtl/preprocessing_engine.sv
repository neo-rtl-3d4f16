// preprocessing_engine: frustum culling and feature extraction for one frame,
// plus generation of the per-tile incoming Gaussian tables.
//
// NUNITS lanes (each one projection, one colour and one duplication unit) take
// Gaussian ids 0..num_gauss-1 in turn. Every lane writes the 2D feature record
// of its Gaussian. Incoming entries from the lanes' duplication units are
// collected round-robin by one writer that keeps a counter per tile and
// appends the entry at inc_base + tile*INC_CAP + count. A tile whose incoming
// table is full drops further entries and counts them in overflow.
// Interface: pulse start (counters are cleared); done pulses when every
// Gaussian has been processed and written. inc_count(cnt_tile) gives the
// length of a tile's incoming table. The lanes, the writer and the arbiter
// share one memory port. Unit counts (4) are the paper's; the rest is this
// design's choice.
module preprocessing_engine
  import neo_pkg::*;
#(
  parameter int NUNITS  = 4,
  parameter int TILE    = 64,
  parameter int NTILES  = 920,
  parameter int INC_CAP = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num_gauss,
  input  camera_t     cam,
  input  logic [MEM_AW-1:0] gauss_base,
  input  logic [MEM_AW-1:0] feat_base,
  input  logic [MEM_AW-1:0] inc_base,
  input  logic [15:0] grid_w,
  input  logic [15:0] grid_h,
  input  logic [15:0] cnt_tile,
  output logic [15:0] inc_count,
  output logic        busy,
  output logic        done,
  output logic [31:0] overflow,
  output logic [31:0] culled_count,
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data
);
  localparam int NM = NUNITS + 1;
  localparam int LW = (NUNITS > 1) ? $clog2(NUNITS) : 1;

  logic [31:0] next_id;
  logic [15:0] cnt [NTILES];
  logic [NUNITS-1:0] l_id_valid, l_id_ready, l_inc_valid, l_inc_ready, l_culled;
  logic [15:0] l_inc_tile [NUNITS];
  entry_t      l_inc_entry [NUNITS];
  logic     [NM-1:0] m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t [NM-1:0] m_req;
  logic     [NUNITS-1:0] ln_req_valid;
  mem_req_t [NUNITS-1:0] ln_req;
  logic        wr_valid;
  mem_req_t    wr_req;
  logic [$clog2(NTILES)-1:0] wtile;
  logic [MEM_DW-1:0] m_rsp_data;

  // hand out Gaussian ids to the lowest idle lane
  always_comb begin
    logic found;
    found = 1'b0;
    l_id_valid = '0;
    for (int i = 0; i < NUNITS; i++) begin
      if (!found && l_id_ready[i] && busy && next_id < num_gauss) begin
        found = 1'b1;
        l_id_valid[i] = 1'b1;
      end
    end
  end

  for (genvar i = 0; i < NUNITS; i++) begin : g_lane
    preprocess_lane #(.TILE(TILE)) u_lane (
      .clk, .rst_n, .cam, .gauss_base, .feat_base, .grid_w, .grid_h,
      .id_valid(l_id_valid[i]), .id_in(next_id), .id_ready(l_id_ready[i]),
      .req_valid(ln_req_valid[i]), .req(ln_req[i]), .req_ready(m_req_ready[i]),
      .rsp_valid(m_rsp_valid[i]), .rsp_data(m_rsp_data),
      .inc_valid(l_inc_valid[i]), .inc_tile(l_inc_tile[i]), .inc_entry(l_inc_entry[i]),
      .inc_ready(l_inc_ready[i]), .culled(l_culled[i]));
  end

  // incoming-table writer
  logic [LW-1:0] wptr, wsel;
  logic          wany, wfull;
  always_comb begin
    wany = 1'b0;
    wsel = '0;
    for (int k = 0; k < NUNITS; k++) begin
      int idx;
      idx = (int'(wptr) + k) % NUNITS;
      if (!wany && l_inc_valid[idx]) begin
        wany = 1'b1;
        wsel = LW'(idx);
      end
    end
    wtile  = $clog2(NTILES)'(l_inc_tile[wsel]);
    wfull  = (cnt[wtile] >= 16'(INC_CAP));
    wr_valid     = wany && !wfull;
    wr_req.we    = 1'b1;
    wr_req.addr  = inc_base + MEM_AW'(l_inc_tile[wsel]) * MEM_AW'(INC_CAP)
                 + MEM_AW'(cnt[wtile]);
    wr_req.wdata = l_inc_entry[wsel];
  end

  always_comb begin
    l_inc_ready = '0;
    if (wany && (wfull || m_req_ready[NUNITS])) l_inc_ready[wsel] = 1'b1;
  end

  assign m_req_valid = {wr_valid, ln_req_valid};
  assign m_req       = {wr_req, ln_req};

  assign inc_count = cnt[$clog2(NTILES)'(cnt_tile)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; next_id <= '0; wptr <= '0; overflow <= '0;
      culled_count <= '0;
      for (int t = 0; t < NTILES; t++) cnt[t] <= '0;
    end else begin
      done <= 1'b0;
      culled_count <= culled_count + 32'($countones(l_culled));
      if (start && !busy) begin
        busy <= 1'b1; next_id <= '0; overflow <= '0; culled_count <= '0;
        for (int t = 0; t < NTILES; t++) cnt[t] <= '0;
      end else if (busy) begin
        if (|l_id_valid) next_id <= next_id + 1'b1;
        if (wany) begin
          wptr <= (wsel == LW'(NUNITS - 1)) ? '0 : wsel + 1'b1;
          if (wfull) overflow <= overflow + 1'b1;
          else if (m_req_ready[NUNITS]) cnt[wtile] <= cnt[wtile] + 1'b1;
        end
        if (next_id >= num_gauss && (&l_id_ready) && !(|l_id_valid)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  mem_arbiter #(.N(NM)) u_arb (
    .clk, .rst_n, .m_req_valid, .m_req, .m_req_ready, .m_rsp_valid, .m_rsp_data,
    .s_req_valid(req_valid), .s_req(req), .s_req_ready(req_ready),
    .s_rsp_valid(rsp_valid), .s_rsp_data(rsp_data));
endmodule
