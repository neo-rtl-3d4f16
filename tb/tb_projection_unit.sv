// Testbench of the projection unit: random cameras (rotation from three
// angles, translation, focal length) and random anisotropic Gaussians, some
// behind the near plane or off screen. A floating-point model of the same
// projection (EWA with a 0.3 pixel low-pass term and 3-sigma radius) gives
// the expected culling decision, 2D mean, conic, radius and tile rectangle;
// the fixed-point unit must agree within small tolerances (a tenth of a
// pixel for the mean, 0.2% for the conic, 0.1% for the radius). Both culling paths
// (near plane and off screen) and visible Gaussians must occur.
module tb_projection_unit;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, done, busy, visible;
  gauss3d_t g;
  camera_t cam;
  logic [15:0] grid_w, grid_h;
  feat2d_t feat;
  rect_t rect;
  projection_unit #(.TILE(64)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 100000) / 100000.0;
  endfunction
  function automatic real fabs(real v); return (v < 0) ? -v : v; endfunction
  function automatic int q16(real v); return int'(v * 65536.0); endfunction

  int n_vis = 0, n_near = 0, n_off = 0, n_skip = 0;

  initial begin
    real R [3][3], T [3], fx, fy, cx, cy, mu [3], S [3][3];
    start = 0; g = '0; cam = '0; grid_w = 40; grid_h = 23;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      real al, be, ga, t [3], x, y, z, J [2][3], M [2][3], C [2][2], det, mid, lam, rad;
      real emx, emy, eca, ecb, ecc, sc [3], q [3][3], Rq [3][3];
      int er, ex0, ex1, ey0, ey1, cxi, cyi;
      bit evis, near;
      // camera
      al = rnd(-0.5, 0.5); be = rnd(-0.5, 0.5); ga = rnd(-0.5, 0.5);
      R[0][0] = $cos(be) * $cos(ga); R[0][1] = -$cos(be) * $sin(ga); R[0][2] = $sin(be);
      R[1][0] = $cos(al) * $sin(ga) + $sin(al) * $sin(be) * $cos(ga);
      R[1][1] = $cos(al) * $cos(ga) - $sin(al) * $sin(be) * $sin(ga);
      R[1][2] = -$sin(al) * $cos(be);
      R[2][0] = $sin(al) * $sin(ga) - $cos(al) * $sin(be) * $cos(ga);
      R[2][1] = $sin(al) * $cos(ga) + $cos(al) * $sin(be) * $sin(ga);
      R[2][2] = $cos(al) * $cos(be);
      for (int i = 0; i < 3; i++) T[i] = rnd(-2.0, 2.0);
      fx = rnd(800.0, 2000.0); fy = fx; cx = 1280.0; cy = 720.0;
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++)
        cam.rot[8 - (3 * i + k)] = 32'(longint'(R[i][k] * 1073741824.0));
      for (int i = 0; i < 3; i++) cam.trans[2 - i] = 32'(q16(T[i]));
      cam.fx = q16(fx); cam.fy = q16(fy); cam.cx = q16(cx); cam.cy = q16(cy);
      // Gaussian: mostly in front of the camera
      for (int i = 0; i < 3; i++) mu[i] = rnd(-3.0, 3.0);
      mu[2] = rnd(-1.0, 12.0);
      // covariance = Rq diag(sc^2) Rq^T with a random rotation
      for (int i = 0; i < 3; i++) sc[i] = rnd(0.005, 0.15);
      begin
        real a1, a2;
        a1 = rnd(0, 3.1); a2 = rnd(0, 3.1);
        Rq[0][0] = $cos(a1); Rq[0][1] = -$sin(a1); Rq[0][2] = 0;
        Rq[1][0] = $sin(a1) * $cos(a2); Rq[1][1] = $cos(a1) * $cos(a2); Rq[1][2] = -$sin(a2);
        Rq[2][0] = $sin(a1) * $sin(a2); Rq[2][1] = $cos(a1) * $sin(a2); Rq[2][2] = $cos(a2);
      end
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++) begin
        S[i][k] = 0;
        for (int j = 0; j < 3; j++) S[i][k] += Rq[i][j] * sc[j] * sc[j] * Rq[k][j];
      end
      g.mux = q16(mu[0]); g.muy = q16(mu[1]); g.muz = q16(mu[2]);
      g.opacity = 16'd40000;
      g.s00 = q16(S[0][0]); g.s01 = q16(S[0][1]); g.s02 = q16(S[0][2]);
      g.s11 = q16(S[1][1]); g.s12 = q16(S[1][2]); g.s22 = q16(S[2][2]);
      // reference, from the quantised inputs
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++)
        R[i][k] = real'($signed(cam.rot[8 - (3 * i + k)])) / 1073741824.0;
      mu[0] = real'(g.mux) / 65536.0; mu[1] = real'(g.muy) / 65536.0; mu[2] = real'(g.muz) / 65536.0;
      S[0][0] = real'(g.s00) / 65536.0; S[0][1] = real'(g.s01) / 65536.0; S[0][2] = real'(g.s02) / 65536.0;
      S[1][1] = real'(g.s11) / 65536.0; S[1][2] = real'(g.s12) / 65536.0; S[2][2] = real'(g.s22) / 65536.0;
      S[1][0] = S[0][1]; S[2][0] = S[0][2]; S[2][1] = S[1][2];
      for (int i = 0; i < 3; i++) t[i] = R[i][0] * mu[0] + R[i][1] * mu[1] + R[i][2] * mu[2] + real'($signed(cam.trans[2 - i])) / 65536.0;
      x = t[0]; y = t[1]; z = t[2];
      evis = 1; near = 0; er = 0; ex0 = 0; ex1 = 0; ey0 = 0; ey1 = 0;
      emx = 0; emy = 0; eca = 0; ecb = 0; ecc = 0;
      if (z < 0.2) begin evis = 0; end
      else begin
        emx = fx * x / z + cx; emy = fy * y / z + cy;
        J[0][0] = fx / z; J[0][1] = 0; J[0][2] = -fx * x / (z * z);
        J[1][0] = 0; J[1][1] = fy / z; J[1][2] = -fy * y / (z * z);
        for (int i = 0; i < 2; i++) for (int k = 0; k < 3; k++)
          M[i][k] = J[i][0] * R[0][k] + J[i][1] * R[1][k] + J[i][2] * R[2][k];
        for (int i = 0; i < 2; i++) for (int k = 0; k < 2; k++) begin
          C[i][k] = 0;
          for (int j = 0; j < 3; j++) for (int l = 0; l < 3; l++) C[i][k] += M[i][j] * S[j][l] * M[k][l];
        end
        C[0][0] += 0.3; C[1][1] += 0.3;
        det = C[0][0] * C[1][1] - C[0][1] * C[0][1];
        eca = C[1][1] / det; ecb = -C[0][1] / det; ecc = C[0][0] / det;
        mid = 0.5 * (C[0][0] + C[1][1]);
        lam = mid + $sqrt((mid * mid - det > 0.1) ? mid * mid - det : 0.1);
        rad = 3.0 * $sqrt(lam);
        er = int'($ceil(rad));
        if (er > 4095) er = 4095;
        cxi = int'($floor(emx)); cyi = int'($floor(emy));
        ex0 = (cxi - er) >>> 6; ex1 = ((cxi + er) >>> 6) + 1;
        ey0 = (cyi - er) >>> 6; ey1 = ((cyi + er) >>> 6) + 1;
        if (ex0 < 0) ex0 = 0;
        if (ey0 < 0) ey0 = 0;
        if (ex1 > 40) ex1 = 40;
        if (ey1 > 23) ey1 = 23;
        if (!(ex0 < ex1 && ey0 < ey1)) evis = 0;
        // stay clear of the rounding edges of ceil and floor
        near = (fabs(rad - $floor(rad + 0.5)) < 0.02) || (fabs(emx - $floor(emx + 0.5)) < 0.1)
            || (fabs(emy - $floor(emy + 0.5)) < 0.1) || fabs(emx) > 30000.0 || fabs(emy) > 30000.0;
      end
      if (z < 0.25 && z > 0.15) near = 1;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      if (near) begin n_skip++; continue; end
      checks++;
      if (visible !== evis) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d visible %b exp %b (z=%f) m=(%f,%f) r=%0d rect %0d-%0d %0d-%0d C=%f %f %f", n, visible, evis, z, emx, emy, er, ex0, ex1, ey0, ey1, C[0][0], C[0][1], C[1][1]);
        continue;
      end
      if (!evis) begin
        if (z < 0.2) n_near++; else n_off++;
        checks++;
        if (feat.radius != 0 || rect != '0) begin failures++; $display("FAIL culled Gaussian has footprint"); end
        continue;
      end
      n_vis++;
      checks++;
      if (fabs(real'(feat.mx) / 65536.0 - emx) > 0.1 + 1e-4 * fabs(emx) || fabs(real'(feat.my) / 65536.0 - emy) > 0.1 + 1e-4 * fabs(emy)) begin
        failures++;
        if (failures < 10) $display("FAIL mean (%f,%f) exp (%f,%f)", real'(feat.mx) / 65536.0, real'(feat.my) / 65536.0, emx, emy);
      end
      checks++;
      if (fabs(real'(feat.ca) / 16777216.0 - eca) > 1e-4 + 0.002 * fabs(eca) ||
          fabs(real'(feat.cb) / 16777216.0 - ecb) > 1e-4 + 0.002 * fabs(eca) ||
          fabs(real'(feat.cc) / 16777216.0 - ecc) > 1e-4 + 0.002 * fabs(ecc)) begin
        failures++;
        if (failures < 10) $display("FAIL conic (%f %f %f) exp (%f %f %f)", real'(feat.ca) / 16777216.0,
                                    real'(feat.cb) / 16777216.0, real'(feat.cc) / 16777216.0, eca, ecb, ecc);
      end
      checks++;
      if (int'(feat.radius) - er > er / 1000 || er - int'(feat.radius) > er / 1000) begin failures++; if (failures < 10) $display("FAIL radius %0d exp %0d", feat.radius, er); end
      checks++;
      if (rect.x0 != 16'(ex0) || rect.x1 != 16'(ex1) || rect.y0 != 16'(ey0) || rect.y1 != 16'(ey1)) begin
        failures++;
        if (failures < 10) $display("FAIL rect %0d-%0d %0d-%0d exp %0d-%0d %0d-%0d", rect.x0, rect.x1, rect.y0, rect.y1, ex0, ex1, ey0, ey1);
      end
      checks++;
      if (feat.depth != 31'(q16(z)) && (int'(feat.depth) - q16(z) > 4 || q16(z) - int'(feat.depth) > 4)) failures++;
    end
    checks++;
    if (n_vis < 50 || n_near == 0 || n_off == 0) begin failures++; $display("FAIL coverage"); end
    $display("visible %0d, near-plane culled %0d, off-screen culled %0d, skipped %0d", n_vis, n_near, n_off, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
