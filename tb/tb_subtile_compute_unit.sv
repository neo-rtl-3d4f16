// Testbench of the Subtile Compute Unit: 16 pixels are blended with a
// sequence of random Gaussians, front to back. A real-valued reference of the
// blending rule (alpha = min(0.99, o exp(-q/2)), skip below 1/255, stop when
// T would fall under 1e-4) is kept per pixel; transmittance and colours are
// computed for every step from the unit's input state, so errors cannot
// accumulate; transmittance and colours are compared with a tolerance that
// covers the fixed-point exp table. Steps whose reference lands close to a
// threshold are not compared. Pixel termination must occur at least once.
module tb_subtile_compute_unit;
  import neo_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  feat2d_t f;
  logic [15:0] px [L], py [L];
  pix_t pin [L], pout [L];
  subtile_compute_unit #(.LANES(L)) dut (.feat(f), .px, .py, .pin, .pout);

  real rt [L], rr [L], rg [L], rb [L];
  bit  rdone [L];
  function automatic real fabs(real v); return (v < 0) ? -v : v; endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ndone = 0, nblend = 0, nskip = 0;
  initial begin
    for (int trial = 0; trial < 200; trial++) begin
      for (int l = 0; l < L; l++) begin
        px[l] = 16'(100 + l % 4); py[l] = 16'(200 + l / 4);
        pin[l] = PIX_INIT;
        rt[l] = 1.0; rr[l] = 0; rg[l] = 0; rb[l] = 0; rdone[l] = 0;
      end
      for (int g = 0; g < 40; g++) begin
        real mx, my, a, b, c, op, s1, s2, th;
        mx = 98.0 + ($urandom % 8000) / 1000.0;
        my = 198.0 + ($urandom % 8000) / 1000.0;
        s1 = 0.5 + ($urandom % 4000) / 1000.0;
        s2 = 0.5 + ($urandom % 4000) / 1000.0;
        th = ($urandom % 1000) / 1000.0;
        // conic of a covariance with standard deviations s1, s2, correlation th/2
        begin
          real sxy, det;
          sxy = th * 0.5 * s1 * s2;
          det = s1 * s1 * s2 * s2 - sxy * sxy;
          a = s2 * s2 / det; b = -sxy / det; c = s1 * s1 / det;
        end
        op = 0.3 + ($urandom % 700) / 1000.0;
        f = '0;
        f.mx = 32'(longint'(mx * 65536.0));
        f.my = 32'(longint'(my * 65536.0));
        f.ca = 32'(longint'(a * 16777216.0));
        f.cb = 32'(longint'(b * 16777216.0));
        f.cc = 32'(longint'(c * 16777216.0));
        f.opacity = 16'(int'(op * 65535.0));
        f.r = 8'($urandom); f.g = 8'($urandom); f.b = 8'($urandom);
        f.radius = 16'd10;
        #1;
        for (int l = 0; l < L; l++) begin
          real dx, dy, q, al, tn, mfx, mfy, fop, dtt, tpre;
          bit near;
          mfx = real'(f.mx) / 65536.0; mfy = real'(f.my) / 65536.0;
          fop = real'(f.opacity) / 65536.0;
          dx = real'(px[l]) - mfx; dy = real'(py[l]) - mfy;
          q = (real'(f.ca) * dx * dx + 2.0 * real'(f.cb) * dx * dy + real'(f.cc) * dy * dy) / 16777216.0;
          al = fop * $exp(-q / 2.0);
          if (al > 0.99) al = 0.99;
          rt[l] = real'(pin[l].t) / 65536.0;
          rr[l] = real'(pin[l].r) / 65536.0;
          rg[l] = real'(pin[l].g) / 65536.0;
          rb[l] = real'(pin[l].b) / 65536.0;
          rdone[l] = pin[l].done;
          tpre = rt[l];
          tn = rt[l] * (1.0 - al);
          near = (al > 0.97 / 255.0 && al < 1.03 / 255.0) || (tn > 0.5e-4 && tn < 3.0e-4 && al >= 0.97 / 255.0);
          if (rdone[l]) begin
            checks++;
            if (pout[l] !== pin[l]) begin failures++; $display("FAIL finished pixel changed"); end
          end else if (near) begin
            nskip++;
          end else begin
            if (al >= 1.0 / 255.0) begin
              if (tn < 1.0e-4) begin rdone[l] = 1; ndone++; end
              else begin
                rr[l] += real'(f.r) * al * rt[l];
                rg[l] += real'(f.g) * al * rt[l];
                rb[l] += real'(f.b) * al * rt[l];
                rt[l] = tn; nblend++;
              end
            end
            checks++;
            dtt = real'(pout[l].t) / 65536.0 - rt[l];
            if (pout[l].done != rdone[l] || (!rdone[l] && (dtt > 2.0e-5 + 0.003 * tpre || dtt < -2.0e-5 - 0.003 * tpre))) begin
              failures++;
              if (failures < 10) $display("FAIL t=%f exp %f done %b/%b", real'(pout[l].t) / 65536.0, rt[l], pout[l].done, rdone[l]);
            end
            checks++;
            if (!rdone[l] && (fabs(real'(pout[l].r) / 65536.0 - rr[l]) > 0.02 + 0.003 * rr[l]
                           || fabs(real'(pout[l].g) / 65536.0 - rg[l]) > 0.02 + 0.003 * rg[l]
                           || fabs(real'(pout[l].b) / 65536.0 - rb[l]) > 0.02 + 0.003 * rb[l])) begin
              failures++;
              if (failures < 10) $display("FAIL colour r=%f exp %f", real'(pout[l].r) / 65536.0, rr[l]);
            end
          end
          // the next step starts from the unit's own output
          pin[l] = pout[l];
        end
      end
    end
    checks++;
    if (ndone == 0) begin failures++; $display("FAIL no pixel terminated"); end
    $display("blends %0d, terminations %0d, near-threshold steps %0d", nblend, ndone, nskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
