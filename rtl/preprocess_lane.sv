// preprocess_lane: one lane of the Preprocessing Engine, holding one
// projection unit, one colour unit and one duplication unit.
//
// For a Gaussian id it reads the GAUSS_WORDS-word 3D record and word 4 of the
// Gaussian's previous feature record (the tile rectangle of the last frame),
// runs projection and colour in parallel, writes the new 2D feature record
// (words 0..4, layout in neo_pkg) and then streams the Gaussian's incoming
// tile entries out of its duplication unit to the engine's incoming-table
// writer. Interface: id_valid/id_ready takes a Gaussian id; one memory master
// port; inc_* is the duplication unit's output stream; culled counts
// Gaussians removed by frustum culling. The lane structure is this design's
// choice; the paper gives four of each unit.
module preprocess_lane
  import neo_pkg::*;
#(
  parameter int TILE = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  camera_t     cam,
  input  logic [MEM_AW-1:0] gauss_base,
  input  logic [MEM_AW-1:0] feat_base,
  input  logic [15:0] grid_w,
  input  logic [15:0] grid_h,
  input  logic        id_valid,
  input  logic [31:0] id_in,
  output logic        id_ready,
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data,
  output logic        inc_valid,
  output logic [15:0] inc_tile,
  output entry_t      inc_entry,
  input  logic        inc_ready,
  output logic        culled
);
  typedef enum logic [2:0] {L_IDLE, L_FETCH, L_COMP, L_WFEAT, L_DUP} state_t;
  state_t state;

  logic [31:0] id;
  logic [MEM_DW-1:0] w [GAUSS_WORDS+1];
  logic [3:0]  iss, rcv;
  logic        pu_start, pu_done, pu_busy, pu_vis, cu_start, cu_done, cu_busy;
  logic        pu_fin, cu_fin, du_start, du_busy, du_done;
  feat2d_t     pf;
  rect_t       prect, old_rect;
  logic [7:0]  cr, cg, cbl;
  gauss3d_t    g;
  logic signed [31:0] mu [3];
  logic signed [31:0] cpos [3];
  logic signed [15:0] sh [12];

  always_comb begin
    g.mux = w[0][63:32]; g.muy = w[0][31:0]; g.muz = w[1][63:32];
    g.opacity = w[1][31:16];
    g.s00 = w[2][63:32]; g.s01 = w[2][31:0]; g.s02 = w[3][63:32];
    g.s11 = w[3][31:0];  g.s12 = w[4][63:32]; g.s22 = w[4][31:0];
    mu[0] = g.mux; mu[1] = g.muy; mu[2] = g.muz;
    cpos[0] = cam.campos[2]; cpos[1] = cam.campos[1]; cpos[2] = cam.campos[0];
    for (int k = 0; k < 4; k++) begin
      sh[k]     = w[5][63-16*k -: 16];
      sh[4 + k] = w[6][63-16*k -: 16];
      sh[8 + k] = w[7][63-16*k -: 16];
    end
    old_rect = rect_t'(w[GAUSS_WORDS]);
  end

  projection_unit #(.TILE(TILE)) u_pu (
    .clk, .rst_n, .start(pu_start), .g, .cam, .grid_w, .grid_h,
    .done(pu_done), .busy(pu_busy), .feat(pf), .rect(prect), .visible(pu_vis));
  color_unit u_cu (
    .clk, .rst_n, .start(cu_start), .mu, .campos(cpos), .sh,
    .done(cu_done), .busy(cu_busy), .r(cr), .g(cg), .b(cbl));
  duplication_unit u_du (
    .clk, .rst_n, .start(du_start), .id, .depth(pf.depth), .rect_new(prect),
    .rect_old(old_rect), .grid_w, .o_valid(inc_valid), .o_tile(inc_tile),
    .o_entry(inc_entry), .o_ready(inc_ready), .busy(du_busy), .done(du_done));

  assign id_ready = (state == L_IDLE);
  assign pu_start = (state == L_FETCH) && (rcv == 4'(GAUSS_WORDS + 1));
  assign cu_start = pu_start;
  assign du_start = (state == L_WFEAT) && (iss == 4'd5);

  always_comb begin
    req_valid = 1'b0;
    req       = '0;
    if (state == L_FETCH && iss < 4'(GAUSS_WORDS + 1)) begin
      req_valid = 1'b1;
      req.addr  = (iss < 4'(GAUSS_WORDS))
                ? gauss_base + id * MEM_AW'(GAUSS_WORDS) + MEM_AW'(iss)
                : feat_base + id * MEM_AW'(FEAT_WORDS) + MEM_AW'(4);
    end else if (state == L_WFEAT && iss < 4'd5) begin
      req_valid = 1'b1;
      req.we    = 1'b1;
      req.addr  = feat_base + id * MEM_AW'(FEAT_WORDS) + MEM_AW'(iss);
      case (iss)
        4'd0:    req.wdata = {pf.mx, pf.my};
        4'd1:    req.wdata = {pf.ca, pf.cb};
        4'd2:    req.wdata = {pf.cc, pf.opacity, pf.radius};
        4'd3:    req.wdata = {1'b0, pf.depth, cr, cg, cbl, 8'h0};
        default: req.wdata = MEM_DW'(prect);
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE; id <= '0; iss <= '0; rcv <= '0; pu_fin <= 1'b0; cu_fin <= 1'b0;
      culled <= 1'b0;
      for (int k = 0; k <= GAUSS_WORDS; k++) w[k] <= '0;
    end else begin
      culled <= 1'b0;
      case (state)
        L_IDLE: if (id_valid) begin
          id <= id_in; iss <= '0; rcv <= '0;
          state <= L_FETCH;
        end
        L_FETCH: begin
          if (req_valid && req_ready) iss <= iss + 1'b1;
          if (rsp_valid) begin
            w[rcv] <= rsp_data;
            rcv <= rcv + 1'b1;
          end
          if (pu_start) begin
            pu_fin <= 1'b0; cu_fin <= 1'b0;
            state  <= L_COMP;
          end
        end
        L_COMP: begin
          if (pu_done) pu_fin <= 1'b1;
          if (cu_done) cu_fin <= 1'b1;
          if ((pu_fin || pu_done) && (cu_fin || cu_done)) begin
            iss   <= '0;
            culled <= !pu_vis;
            state <= L_WFEAT;
          end
        end
        L_WFEAT: begin
          if (req_valid && req_ready) iss <= iss + 1'b1;
          if (du_start) state <= L_DUP;
        end
        L_DUP: if (du_done) state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
