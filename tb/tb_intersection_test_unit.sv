// Testbench of the Intersection Test Unit: random Gaussians (mean, radius,
// including radius 0) against random 8x8 subtiles; the hit flag is compared
// with an independent interval-overlap computation in integers, and the
// cumulative OR output is checked for both values of the chain input.
module tb_intersection_test_unit;
  import neo_pkg::*;
  int checks = 0, failures = 0;
  feat2d_t f;
  logic [15:0] sx, sy;
  logic acc_in, hit, acc_out;
  intersection_test_unit #(.SUBTILE(8)) dut (.feat(f), .sub_x(sx), .sub_y(sy), .acc_in, .hit, .acc_out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cx, cy, r, x0, y0, nh;
    bit e;
    nh = 0;
    for (int n = 0; n < 20000; n++) begin
      f = '0;
      cx = int'($urandom % 400) - 50;
      cy = int'($urandom % 400) - 50;
      r  = (n % 10 == 0) ? 0 : int'($urandom % 40);
      f.mx = 32'(cx) <<< 16 | 32'($urandom % 65536);
      f.my = 32'(cy) <<< 16 | 32'($urandom % 65536);
      f.radius = 16'(r);
      x0 = 8 * ((cx + 64) / 8 + int'($urandom % 9) - 12);
      y0 = 8 * ((cy + 64) / 8 + int'($urandom % 9) - 12);
      if (x0 < 0) x0 = 0;
      if (y0 < 0) y0 = 0;
      sx = 16'(x0); sy = 16'(y0);
      acc_in = $urandom % 2;
      #1;
      // overlap of [cx-r, cx+r] with [x0, x0+7] on both axes
      e = (r != 0) && !(cx + r < x0 || cx - r > x0 + 7) && !(cy + r < y0 || cy - r > y0 + 7);
      nh += int'(e);
      checks++;
      if (hit !== e) begin
        failures++;
        if (failures < 10) $display("FAIL c=(%0d,%0d) r=%0d sub=(%0d,%0d) hit=%b exp=%b", cx, cy, r, x0, y0, hit, e);
      end
      checks++;
      if (acc_out !== (acc_in | e)) failures++;
    end
    checks++;
    if (nh < 100) failures++;
    $display("hits: %0d of 20000", nh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
