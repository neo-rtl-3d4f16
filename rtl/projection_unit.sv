// projection_unit: projects one 3D Gaussian onto the image plane and culls it.
//
// Steps (standard 3D Gaussian Splatting projection, in fixed point):
//   t = R mu + T (camera space); culled if t.z < 0.2;
//   1/z by division; 2D mean = (fx x/z + cx, fy y/z + cy);
//   Jacobian J = [[fx/z, 0, -fx x/z^2], [0, fy/z, -fy y/z^2]], M = J R;
//   2D covariance S' = M S M^T + 0.3 I; culled if det(S') <= 0;
//   conic (inverse of S') = (c, -b, a) / det by three divisions;
//   radius = ceil(3 sqrt(lambda_max)), lambda_max = mid + sqrt(max(0.1, mid^2 - det));
//   tile rectangle [x0,x1) x [y0,y1) of the tiles the square of half-width
//   radius around the integer mean touches, clipped to the tile grid; culled
//   (radius 0, empty rectangle) when it is empty.
// One divider and one square-root unit are shared, so a Gaussian takes about
// 400 cycles. Interface: pulse start with g and cam; done pulses with feat
// (colour fields zero, filled by the colour unit), rect and visible held until
// the next start.
// The paper names the unit and its job (projection and frustum culling); the
// arithmetic is the usual 3DGS projection, and the formats, the 0.2 near
// plane, the 0.3 low-pass term and the sequential datapath are this design's
// choices.
module projection_unit
  import neo_pkg::*;
#(
  parameter int TILE = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  gauss3d_t    g,
  input  camera_t     cam,
  input  logic [15:0] grid_w,
  input  logic [15:0] grid_h,
  output logic        done,
  output logic        busy,
  output feat2d_t     feat,
  output rect_t       rect,
  output logic        visible
);
  localparam longint NEAR_Q16 = 13107;          // 0.2
  localparam longint LOWPASS  = 19661;          // 0.3 in Q.16
  localparam longint DISC_MIN = 429496730;      // 0.1 in Q.32
  localparam int TSH = $clog2(TILE);

  typedef enum logic [3:0] {
    P_IDLE, P_XFORM, P_DIVZ, P_PROJ, P_COV, P_COV2, P_DET, P_DIVA, P_DIVB,
    P_DIVC, P_SQ1, P_SQ2, P_RECT, P_DONE
  } state_t;
  state_t state;

  gauss3d_t gi;
  logic signed [63:0] tx, ty, tz, invz, mx, my;
  logic signed [63:0] m [2][3];
  logic signed [63:0] pm [2][3];
  logic signed [63:0] ca, cb, cc;
  logic signed [127:0] a, b, c, det, mid;

  logic        dv_start, dv_busy, dv_done, sq_start, sq_busy, sq_done;
  logic [95:0] dv_num, dv_den, dv_quo, sq_x;
  logic [47:0] sq_root;
  seq_div  #(.W(96)) u_div (.clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
                            .busy(dv_busy), .done(dv_done), .quo(dv_quo));
  seq_sqrt #(.W(96)) u_sqrt (.clk, .rst_n, .start(sq_start), .x(sq_x),
                             .busy(sq_busy), .done(sq_done), .root(sq_root));

  function automatic logic signed [63:0] rmul(input logic signed [31:0] r,
                                              input logic signed [31:0] v);
    return 64'((64'(r) * 64'(v)) >>> 30);
  endfunction

  function automatic logic signed [31:0] sat32(input logic signed [127:0] v);
    if (v > 128'sh7FFF_FFFF)   return 32'sh7FFF_FFFF;
    if (v < -128'sh8000_0000)  return -32'sh8000_0000;
    return 32'(v);
  endfunction

  // elements of the packed camera arrays are unsigned; take signed copies
  logic signed [31:0] rs [9];
  logic signed [31:0] ts [3];
  always_comb begin
    for (int k = 0; k < 9; k++) rs[k] = $signed(cam.rot[k]);
    for (int k = 0; k < 3; k++) ts[k] = $signed(cam.trans[k]);
  end

  logic signed [31:0] sig [3][3];
  always_comb begin
    sig[0][0] = gi.s00; sig[0][1] = gi.s01; sig[0][2] = gi.s02;
    sig[1][0] = gi.s01; sig[1][1] = gi.s11; sig[1][2] = gi.s12;
    sig[2][0] = gi.s02; sig[2][1] = gi.s12; sig[2][2] = gi.s22;
  end

  assign busy = (state != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE; done <= 1'b0; feat <= '0; rect <= '0; visible <= 1'b0;
      gi <= '0; tx <= '0; ty <= '0; tz <= '0; invz <= '0;
      mx <= '0; my <= '0; ca <= '0; cb <= '0; cc <= '0;
      a <= '0; b <= '0; c <= '0; det <= '0; mid <= '0;
      dv_start <= 1'b0; sq_start <= 1'b0; dv_num <= '0; dv_den <= '0; sq_x <= '0;
      for (int i = 0; i < 2; i++) for (int k = 0; k < 3; k++) begin
        m[i][k] <= '0; pm[i][k] <= '0;
      end
    end else begin
      done     <= 1'b0;
      dv_start <= 1'b0;
      sq_start <= 1'b0;
      case (state)
        P_IDLE: if (start) begin
          gi <= g;
          state <= P_XFORM;
        end
        P_XFORM: begin
          logic signed [63:0] t0, t1, t2;
          t0 = rmul(rs[8], gi.mux) + rmul(rs[7], gi.muy) + rmul(rs[6], gi.muz) + 64'(ts[2]);
          t1 = rmul(rs[5], gi.mux) + rmul(rs[4], gi.muy) + rmul(rs[3], gi.muz) + 64'(ts[1]);
          t2 = rmul(rs[2], gi.mux) + rmul(rs[1], gi.muy) + rmul(rs[0], gi.muz) + 64'(ts[0]);
          // rs[8] is R[0][0] (packed arrays count down), see neo_pkg
          tx <= t0; ty <= t1; tz <= t2;
          if (t2 < NEAR_Q16) begin
            state <= P_DONE;
            visible <= 1'b0;
          end else begin
            dv_num <= 96'(1) << 48; dv_den <= 96'(t2); dv_start <= 1'b1;
            state <= P_DIVZ;
          end
        end
        P_DIVZ: if (dv_done) begin
          invz  <= 64'(dv_quo);
          state <= P_PROJ;
        end
        P_PROJ: begin
          logic signed [63:0] x_z, y_z, j00, j11, j02, j12;
          x_z = 64'((128'(tx) * 128'(invz)) >>> 16);      // Q.32
          y_z = 64'((128'(ty) * 128'(invz)) >>> 16);
          j00 = 64'((128'(cam.fx) * 128'(invz)) >>> 32);  // Q.16
          j11 = 64'((128'(cam.fy) * 128'(invz)) >>> 32);
          j02 = -64'((128'(j00) * 128'(x_z)) >>> 32);
          j12 = -64'((128'(j11) * 128'(y_z)) >>> 32);
          mx <= 64'((128'(cam.fx) * 128'(x_z)) >>> 32) + 64'(cam.cx);
          my <= 64'((128'(cam.fy) * 128'(y_z)) >>> 32) + 64'(cam.cy);
          for (int k = 0; k < 3; k++) begin
            m[0][k] <= 64'((128'(j00) * 128'(rs[8-k]) + 128'(j02) * 128'(rs[2-k])) >>> 30);
            m[1][k] <= 64'((128'(j11) * 128'(rs[5-k]) + 128'(j12) * 128'(rs[2-k])) >>> 30);
          end
          state <= P_COV;
        end
        P_COV: begin
          for (int i = 0; i < 2; i++)
            for (int k = 0; k < 3; k++)
              pm[i][k] <= 64'((128'(m[i][0]) * 128'(sig[0][k]) + 128'(m[i][1]) * 128'(sig[1][k])
                              + 128'(m[i][2]) * 128'(sig[2][k])) >>> 16);
          state <= P_COV2;
        end
        P_COV2: begin
          a <= ((128'(pm[0][0]) * 128'(m[0][0]) + 128'(pm[0][1]) * 128'(m[0][1])
               + 128'(pm[0][2]) * 128'(m[0][2])) >>> 16) + 128'(LOWPASS);
          b <=  (128'(pm[0][0]) * 128'(m[1][0]) + 128'(pm[0][1]) * 128'(m[1][1])
               + 128'(pm[0][2]) * 128'(m[1][2])) >>> 16;
          c <= ((128'(pm[1][0]) * 128'(m[1][0]) + 128'(pm[1][1]) * 128'(m[1][1])
               + 128'(pm[1][2]) * 128'(m[1][2])) >>> 16) + 128'(LOWPASS);
          state <= P_DET;
        end
        P_DET: begin
          logic signed [127:0] d;
          d = a * c - b * b;                           // Q.32
          det <= d;
          mid <= (a + c) >>> 1;
          if (d <= 0 || a > 128'sh00FF_FFFF_FFFF || c > 128'sh00FF_FFFF_FFFF) begin
            visible <= 1'b0;
            state   <= P_DONE;
          end else begin
            dv_num <= 96'(c) << 40; dv_den <= 96'(d); dv_start <= 1'b1;
            state  <= P_DIVA;
          end
        end
        P_DIVA: if (dv_done) begin
          ca <= 64'(dv_quo);
          dv_num <= 96'((b < 0) ? -b : b) << 40; dv_den <= 96'(det); dv_start <= 1'b1;
          state <= P_DIVB;
        end
        P_DIVB: if (dv_done) begin
          cb <= (b < 0) ? 64'(dv_quo) : -64'(dv_quo);
          dv_num <= 96'(a) << 40; dv_den <= 96'(det); dv_start <= 1'b1;
          state <= P_DIVC;
        end
        P_DIVC: if (dv_done) begin
          logic signed [127:0] disc;
          cc <= 64'(dv_quo);
          disc = mid * mid - det;
          sq_x <= (disc < 128'(DISC_MIN)) ? 96'(DISC_MIN) : 96'(disc);
          sq_start <= 1'b1;
          state <= P_SQ1;
        end
        P_SQ1: if (sq_done) begin
          sq_x <= 96'(mid + 128'(sq_root)) << 16;
          sq_start <= 1'b1;
          state <= P_SQ2;
        end
        P_SQ2: if (sq_done) begin
          logic signed [63:0] r;
          logic signed [63:0] cxi, cyi;
          logic signed [63:0] x0, x1, y0, y1;
          r   = 64'((65'(sq_root) * 65'd3 + 65'hFFFF) >> 16);
          if (r > 64'sd4095) r = 64'sd4095;
          cxi = mx >>> 16;
          cyi = my >>> 16;
          x0 = (cxi - 64'(r)) >>> TSH;
          x1 = ((cxi + 64'(r)) >>> TSH) + 1;
          y0 = (cyi - 64'(r)) >>> TSH;
          y1 = ((cyi + 64'(r)) >>> TSH) + 1;
          if (x0 < 0) x0 = 0;
          if (y0 < 0) y0 = 0;
          if (x1 > $signed(64'(grid_w))) x1 = $signed(64'(grid_w));
          if (y1 > $signed(64'(grid_h))) y1 = $signed(64'(grid_h));
          feat.mx <= sat32(128'(mx));
          feat.my <= sat32(128'(my));
          feat.ca <= sat32(128'(ca));
          feat.cb <= sat32(128'(cb));
          feat.cc <= sat32(128'(cc));
          feat.opacity <= gi.opacity;
          feat.depth <= (tz > 64'(DEPTH_MAX)) ? DEPTH_MAX : 31'(tz);
          feat.r <= '0; feat.g <= '0; feat.b <= '0;
          if (x0 < x1 && y0 < y1) begin
            visible     <= 1'b1;
            feat.radius <= 16'(r);
            rect <= '{x0: 16'(x0), x1: 16'(x1), y0: 16'(y0), y1: 16'(y1)};
          end else begin
            visible     <= 1'b0;
          end
          state <= P_DONE;
        end
        P_DONE: begin
          if (!visible) begin
            feat.radius <= '0;
            rect <= '0;
          end
          done  <= 1'b1;
          state <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
