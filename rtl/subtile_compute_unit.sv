// subtile_compute_unit (SCU): alpha-blends one projected Gaussian into LANES
// pixels of a subtile in one cycle (combinational; the rasterization core
// registers the result in its pixel buffer).
//
// Per pixel (x, y), with d = (x, y) - mean and conic (a, b, c) the inverse 2D
// covariance, the standard 3D Gaussian Splatting blending step is:
//   q = a dx^2 + 2 b dx dy + c dy^2;  alpha = min(0.99, opacity * exp(-q/2))
//   skip if q < 0 or alpha < 1/255;   T' = T (1 - alpha)
//   if T' < 1e-4 the pixel is finished (done) and nothing is added,
//   else colour += rgb * alpha * T and T = T'.
// exp(-x) is computed as 2^(-x log2 e): the integer part is a right shift and
// the fractional part a 17-entry table of 2^(-i/16) with linear interpolation
// (relative error below 0.1%). Fixed-point formats are those of neo_pkg.
// The blending rule follows the paper's Eq. 1 and its description of
// rasterization; the number formats, LANES and the exp approximation are this
// design's choices.
module subtile_compute_unit
  import neo_pkg::*;
#(
  parameter int LANES = 16
) (
  input  feat2d_t     feat,
  input  logic [15:0] px [LANES],
  input  logic [15:0] py [LANES],
  input  pix_t        pin  [LANES],
  output pix_t        pout [LANES]
);
  localparam logic [16:0] ALPHA_MAX = 17'd64881;   // 0.99
  localparam logic [16:0] ALPHA_MIN = 17'd257;     // 1/255
  localparam logic [16:0] T_MIN     = 17'd7;       // 1e-4
  localparam longint      LOG2E_Q16 = 94548;

  function automatic logic [16:0] exp2_lut(input logic [4:0] i);
    case (i)
      5'd0:  return 17'd65536;  5'd1:  return 17'd62757;  5'd2:  return 17'd60097;
      5'd3:  return 17'd57549;  5'd4:  return 17'd55109;  5'd5:  return 17'd52773;
      5'd6:  return 17'd50535;  5'd7:  return 17'd48393;  5'd8:  return 17'd46341;
      5'd9:  return 17'd44376;  5'd10: return 17'd42495;  5'd11: return 17'd40693;
      5'd12: return 17'd38968;  5'd13: return 17'd37316;  5'd14: return 17'd35734;
      5'd15: return 17'd34219;  default: return 17'd32768;
    endcase
  endfunction

  // exp(-x), x >= 0 in Q.16, result Q1.16
  function automatic logic [16:0] exp_neg(input logic [47:0] x);
    logic [63:0] y;
    logic [31:0] k;
    logic [3:0]  idx;
    logic [11:0] fr;
    logic [16:0] lo, hi;
    logic [29:0] interp;
    y      = (64'(x) * 64'(LOG2E_Q16)) >> 16;
    k      = y[47:16];
    idx    = y[15:12];
    fr     = y[11:0];
    lo     = exp2_lut({1'b0, idx});
    hi     = exp2_lut({1'b0, idx} + 5'd1);
    interp = 30'(lo) - ((30'(lo - hi) * 30'(fr)) >> 12);
    if (k >= 17) return '0;
    return 17'(interp[16:0] >> k[4:0]);
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb begin
      logic signed [32:0] dxf, dyf;
      logic signed [65:0] dx2, dy2, dxy;
      logic signed [99:0] q;
      logic signed [59:0] qs;
      logic [16:0] e, alpha, tt, w;
      logic [32:0] ae;
      logic [33:0] tmul, wmul;
      pout[l] = pin[l];
      dxf = (33'(signed'({1'b0, px[l]})) <<< 16) - 33'(feat.mx);
      dyf = (33'(signed'({1'b0, py[l]})) <<< 16) - 33'(feat.my);
      dx2 = 66'(dxf) * 66'(dxf);     // Q.32
      dy2 = 66'(dyf) * 66'(dyf);
      dxy = 66'(dxf) * 66'(dyf);
      q   = 100'(feat.ca) * 100'(dx2) + 100'(feat.cb) * 100'(dxy) * 100'sd2
          + 100'(feat.cc) * 100'(dy2);         // Q.56
      qs  = 60'(q >>> 40);                     // Q.16
      e     = '0;
      alpha = '0;
      tt    = '0;
      w     = '0;
      ae    = '0;
      tmul  = '0;
      wmul  = '0;
      if (!pin[l].done && (qs >= 0) && (qs < 60'sh0_0000_0400_0000)) begin
        e  = exp_neg(48'(qs >>> 1));
        ae = (33'(feat.opacity) * 33'(e)) >> 16;
        alpha = (ae > 33'(ALPHA_MAX)) ? ALPHA_MAX : 17'(ae);
        if (alpha >= ALPHA_MIN) begin
          tmul = (34'(pin[l].t) * 34'(17'h10000 - alpha)) >> 16;
          tt   = 17'(tmul);
          if (tt < T_MIN) begin
            pout[l].done = 1'b1;
          end else begin
            wmul = (34'(alpha) * 34'(pin[l].t)) >> 16;
            w    = 17'(wmul);
            pout[l].r = pin[l].r + 24'(32'(feat.r) * 32'(w));
            pout[l].g = pin[l].g + 24'(32'(feat.g) * 32'(w));
            pout[l].b = pin[l].b + 24'(32'(feat.b) * 32'(w));
            pout[l].t = tt;
          end
        end
      end
    end
  end
endmodule
