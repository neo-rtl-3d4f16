// neo_pkg: types and constants shared by every block of the Neo 3D Gaussian
// Splatting accelerator.
//
// Gaussian table entry (one 64-bit memory word): valid bit, 31-bit unsigned
// depth (Q15.16 camera-space z) and 32-bit Gaussian ID. The table of a tile
// holds the IDs and depths of the Gaussians that touch the tile, front to back.
// The paper states that tables hold "the IDs and depth values" and that
// outgoing Gaussians are marked by a valid bit; the field widths are this
// design's choice.
//
// Memory: every master sees a 64-bit word-addressed port. A request is
// {we, addr, wdata} with valid/ready; read data come back in request order on
// rsp_valid/rsp_data one or more cycles later and cannot be stalled.
package neo_pkg;

  localparam int MEM_AW = 32;
  localparam int MEM_DW = 64;

  typedef struct packed {
    logic        we;
    logic [MEM_AW-1:0] addr;
    logic [MEM_DW-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        valid;   // 0: outgoing Gaussian, removed at the next merge
    logic [30:0] depth;   // Q15.16, smaller is nearer
    logic [31:0] id;
  } entry_t;

  // Padding entry used to fill a partly filled chunk: sorts behind every real
  // entry (real depths are clamped to DEPTH_MAX by the preprocessing engine).
  localparam logic [30:0] DEPTH_MAX = 31'h7FFF_FFFE;
  localparam entry_t PAD_ENTRY = '{valid: 1'b0, depth: 31'h7FFF_FFFF, id: 32'hFFFF_FFFF};

  // Projected (2D) Gaussian as stored in the feature table: FEAT_WORDS words
  // per Gaussian at feat_base + id*FEAT_WORDS.
  //  w0: {mean_x Q16.16, mean_y Q16.16}
  //  w1: {conic_a Q8.24, conic_b Q8.24}
  //  w2: {conic_c Q8.24, opacity Q0.16, radius (pixels)}
  //  w3: {1'b0, depth Q15.16, r, g, b, 8'h0}
  //  w4: tile rectangle of this frame {x0, x1, y0, y1}, x1/y1 exclusive;
  //      all-zero when the Gaussian was culled
  localparam int FEAT_WORDS = 8;

  typedef struct packed {
    logic signed [31:0] mx;
    logic signed [31:0] my;
    logic signed [31:0] ca;
    logic signed [31:0] cb;
    logic signed [31:0] cc;
    logic [15:0] opacity;
    logic [15:0] radius;
    logic [30:0] depth;
    logic [7:0]  r;
    logic [7:0]  g;
    logic [7:0]  b;
  } feat2d_t;

  typedef struct packed {
    logic [15:0] x0;
    logic [15:0] x1;
    logic [15:0] y0;
    logic [15:0] y1;
  } rect_t;

  // 3D Gaussian record in memory, GAUSS_WORDS words at gauss_base + id*GAUSS_WORDS.
  //  w0: {mu_x, mu_y} Q16.16      w1: {mu_z Q16.16, opacity Q0.16, 16'h0}
  //  w2: {S00, S01}  w3: {S02, S11}  w4: {S12, S22}   covariance Q16.16
  //  w5: {sh0_r, sh0_g, sh0_b, sh1_r}  w6: {sh1_g, sh1_b, sh2_r, sh2_g}
  //  w7: {sh2_b, sh3_r, sh3_g, sh3_b}  SH coefficients Q4.12 signed
  localparam int GAUSS_WORDS = 8;

  typedef struct packed {
    logic signed [31:0] mux, muy, muz;
    logic [15:0] opacity;
    logic signed [31:0] s00, s01, s02, s11, s12, s22;
  } gauss3d_t;

  // Camera: world-to-camera rotation (Q2.30) and translation, focal lengths and
  // principal point in pixels, camera centre in world space (all Q16.16).
  // rot = {R00, R01, R02, R10, ..., R22}, so rot[8] is R00 and rot[0] is R22;
  // trans = {Tx, Ty, Tz} and campos = {Cx, Cy, Cz}: element 2 is x, element 0 is z.
  typedef struct packed {
    logic signed [8:0][31:0] rot;     // row-major R, Q2.30
    logic signed [2:0][31:0] trans;   // Q16.16
    logic signed [31:0] fx, fy, cx, cy;
    logic signed [2:0][31:0] campos;
  } camera_t;

  // Per-tile sorting job: previous table at tbl_base (tbl_len entries, sorted
  // in place by Dynamic Partial Sorting), incoming table at inc_base, merged
  // result written to out_base.
  typedef struct packed {
    logic [15:0] tile;
    logic [MEM_AW-1:0] tbl_base;
    logic [15:0] tbl_len;
    logic [MEM_AW-1:0] inc_base;
    logic [15:0] inc_len;
    logic [MEM_AW-1:0] out_base;
    logic [MEM_AW-1:0] scr_base;  // scratch area (inc_len words) for the global merge
    logic [15:0] frame;
  } sort_job_t;

  typedef struct packed {
    logic [15:0] tile;
    logic [15:0] out_len;
  } sort_res_t;

  // Per-tile rasterization job.
  typedef struct packed {
    logic [15:0] tile_x;
    logic [15:0] tile_y;
    logic [MEM_AW-1:0] tbl_base;
    logic [15:0] tbl_len;
  } rast_job_t;

  // Pixel state during blending: transmittance Q1.16, colour sums Q8.16.
  typedef struct packed {
    logic        done;
    logic [16:0] t;
    logic [23:0] r;
    logic [23:0] g;
    logic [23:0] b;
  } pix_t;

  localparam pix_t PIX_INIT = '{done: 1'b0, t: 17'h10000, r: '0, g: '0, b: '0};

  function automatic logic entry_le(entry_t a, entry_t b);
    return a.depth <= b.depth;
  endfunction

endpackage
