// Testbench of the colour unit: random Gaussian positions, camera centres and
// degree-1 SH coefficients; the 8-bit colours are compared with a real-valued
// evaluation of 0.5 + C0 sh0 - C1 y sh1 + C1 z sh2 - C1 x sh3 (clamped),
// allowing one code of rounding. The latency is checked against the 119
// cycles given in the unit's description.
module tb_color_unit;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, done, busy;
  logic signed [31:0] mu [3], campos [3];
  logic signed [15:0] sh [12];
  logic [7:0] r, g, b;
  color_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_ch(real s0, real s1, real s2, real s3, real x, real y, real z);
    real v;
    v = 0.5 + 0.28209479 * s0 - 0.48860251 * y * s1 + 0.48860251 * z * s2 - 0.48860251 * x * s3;
    if (v < 0) v = 0;
    if (v > 65535.0 / 65536.0) v = 65535.0 / 65536.0;
    return int'($floor(v * 255.0));
  endfunction

  initial begin
    int cyc, maxcyc;
    maxcyc = 0;
    start = 0;
    for (int k = 0; k < 3; k++) begin mu[k] = 0; campos[k] = 0; end
    for (int k = 0; k < 12; k++) sh[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      real dx, dy, dz, ln, s [12];
      int er, eg, eb;
      @(negedge clk);
      for (int k = 0; k < 3; k++) begin
        mu[k] = 32'(int'($urandom % 2000000) - 1000000) <<< 4;
        campos[k] = 32'(int'($urandom % 2000000) - 1000000) <<< 2;
      end
      for (int k = 0; k < 12; k++) sh[k] = 16'(int'($urandom % 8192) - 4096);
      dx = real'(mu[0] - campos[0]); dy = real'(mu[1] - campos[1]); dz = real'(mu[2] - campos[2]);
      ln = $sqrt(dx * dx + dy * dy + dz * dz);
      dx /= ln; dy /= ln; dz /= ln;
      for (int k = 0; k < 12; k++) s[k] = real'(sh[k]) / 4096.0;
      er = ref_ch(s[0], s[3], s[6], s[9],  dx, dy, dz);
      eg = ref_ch(s[1], s[4], s[7], s[10], dx, dy, dz);
      eb = ref_ch(s[2], s[5], s[8], s[11], dx, dy, dz);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (cyc > maxcyc) maxcyc = cyc;
      checks++;
      if (int'(r) - er > 1 || er - int'(r) > 1 || int'(g) - eg > 1 || eg - int'(g) > 1 ||
          int'(b) - eb > 1 || eb - int'(b) > 1) begin
        failures++;
        if (failures < 10) $display("FAIL rgb %0d %0d %0d exp %0d %0d %0d", r, g, b, er, eg, eb);
      end
    end
    checks++;
    if (maxcyc != 119) begin failures++; $display("FAIL latency %0d", maxcyc); end
    $display("latency %0d cycles", maxcyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
