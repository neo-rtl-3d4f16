// Testbench of the Preprocessing Engine (4 lanes) on a 4x2-tile grid with the
// incoming-table capacity reduced to 6 entries. 120 isotropic Gaussians in
// front of, behind and beside a camera are processed; each has a random
// "previous frame" tile rectangle preloaded in its feature record. Checks:
//   culling (near plane or no tile touched) against a real-valued projection;
//   the 2D mean against the projection (0.1 pixel), and the stored tile
//   rectangle against the stored mean and radius;
//   each tile's incoming table: only Gaussians whose new rectangle contains
//   the tile and whose old one does not, no duplicates, exactly
//   min(capacity, expected) entries, and the overflow count for the rest.
module tb_preprocessing_engine;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int GW = 4, GH = 2, NT = GW * GH, CAP = 6, NG = 120;
  localparam logic [31:0] GB = 32'h0, FB = 32'h0010_0000, IB = 32'h0020_0000;

  logic start, busy, done, req_valid, req_ready, rsp_valid;
  logic [31:0] num_gauss, overflow, culled_count;
  camera_t cam;
  logic [15:0] cnt_tile, inc_count;
  mem_req_t req;
  logic [63:0] rsp_data;

  preprocessing_engine #(.NUNITS(4), .TILE(64), .NTILES(NT), .INC_CAP(CAP)) dut (
    .clk, .rst_n, .start, .num_gauss, .cam, .gauss_base(GB), .feat_base(FB), .inc_base(IB),
    .grid_w(16'(GW)), .grid_h(16'(GH)), .cnt_tile, .inc_count, .busy, .done, .overflow,
    .culled_count, .req_valid, .req, .req_ready, .rsp_valid, .rsp_data);
  tb_dram #(.LAT(5), .STALL(10)) u_dram (.clk, .rst_n, .req_valid, .req, .req_ready, .rsp_valid, .rsp_data);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v); return (v < 0) ? -v : v; endfunction

  rect_t old_r [NG];
  bit    evis [NG], sure [NG];
  real   emx [NG], emy [NG];

  initial begin
    int exp_cnt [NT], n_cull, tot_over, cycles;
    start = 0; num_gauss = NG; cnt_tile = 0; cam = '0;
    // identity rotation, no translation, f = 200, principal point (128, 64)
    cam.rot[8] = 32'h4000_0000; cam.rot[4] = 32'h4000_0000; cam.rot[0] = 32'h4000_0000;
    cam.fx = 200 <<< 16; cam.fy = 200 <<< 16; cam.cx = 128 <<< 16; cam.cy = 64 <<< 16;
    for (int n = 0; n < NG; n++) begin
      real x, y, z, s, f, c00, c11, c01, det, mid, lam;
      int xi, yi, zi, si;
      xi = int'($urandom % 80000) - 40000;
      yi = int'($urandom % 40000) - 20000;
      zi = (n % 10 == 0) ? -30000 + int'($urandom % 35000) : 30000 + int'($urandom % 120000);
      si = 300 + int'($urandom % 3000);
      x = real'(xi) / 65536.0; y = real'(yi) / 65536.0; z = real'(zi) / 65536.0; s = real'(si) / 65536.0;
      u_dram.mem[GB + 32'(n * GAUSS_WORDS)]     = {32'(xi), 32'(yi)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 1)] = {32'(zi), 16'd50000, 16'h0};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 2)] = {32'(si * si / 65536), 32'h0};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 3)] = {32'h0, 32'(si * si / 65536)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 4)] = {32'h0, 32'(si * si / 65536)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 5)] = {16'h0400, 16'h0800, 16'h0C00, 16'h0100};
      // previous rectangle: random, or empty
      old_r[n] = '0;
      if (n % 3 != 0) begin
        old_r[n].x0 = 16'($urandom % GW); old_r[n].x1 = old_r[n].x0 + 16'(1 + $urandom % 2);
        old_r[n].y0 = 16'($urandom % GH); old_r[n].y1 = old_r[n].y0 + 16'(1);
      end
      u_dram.mem[FB + 32'(n * FEAT_WORDS + 4)] = old_r[n];
      // reference culling decision
      s = real'(si * si / 65536) / 65536.0;     // variance as stored
      sure[n] = 1; evis[n] = 0; emx[n] = 0; emy[n] = 0;
      if (z >= 0.2) begin
        int r, cx, cy, x0, x1, y0, y1;
        f = 200.0;
        emx[n] = f * x / z + 128.0; emy[n] = f * y / z + 64.0;
        c00 = s * (f * f / (z * z) + f * f * x * x / (z * z * z * z)) + 0.3;
        c11 = s * (f * f / (z * z) + f * f * y * y / (z * z * z * z)) + 0.3;
        c01 = s * (f * f * x * y / (z * z * z * z));
        det = c00 * c11 - c01 * c01; mid = 0.5 * (c00 + c11);
        lam = mid + $sqrt((mid * mid - det > 0.1) ? mid * mid - det : 0.1);
        r = int'($ceil(3.0 * $sqrt(lam)));
        cx = int'($floor(emx[n])); cy = int'($floor(emy[n]));
        x0 = (cx - r) >>> 6; x1 = ((cx + r) >>> 6) + 1; y0 = (cy - r) >>> 6; y1 = ((cy + r) >>> 6) + 1;
        if (x0 < 0) x0 = 0;
        if (y0 < 0) y0 = 0;
        if (x1 > GW) x1 = GW;
        if (y1 > GH) y1 = GH;
        evis[n] = (x0 < x1) && (y0 < y1);
        // decisions within a pixel of a tile edge are not compared
        if (((cx + r + 1) % 64 <= 2) || ((cx - r + 64000 + 1) % 64 <= 2) ||
            ((cy + r + 1) % 64 <= 2) || ((cy - r + 64000 + 1) % 64 <= 2)) sure[n] = 0;
      end
      if (z > 0.15 && z < 0.25) sure[n] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    $display("%0d Gaussians in %0d cycles", NG, cycles);
    // per-Gaussian checks
    n_cull = 0;
    for (int t = 0; t < NT; t++) exp_cnt[t] = 0;
    for (int n = 0; n < NG; n++) begin
      logic [63:0] w0, w2;
      rect_t rn;
      bit vis;
      w0 = u_dram.peek(FB + 32'(n * FEAT_WORDS));
      w2 = u_dram.peek(FB + 32'(n * FEAT_WORDS + 2));
      rn = rect_t'(u_dram.peek(FB + 32'(n * FEAT_WORDS + 4)));
      vis = (rn != '0);
      if (!vis) n_cull++;
      if (sure[n]) begin
        checks++;
        if (vis != evis[n]) begin failures++; $display("FAIL Gaussian %0d visible %b exp %b", n, vis, evis[n]); end
      end
      if (vis) begin
        int r, cx, cy, x0, x1, y0, y1;
        checks++;
        if (evis[n] && (fabs(real'($signed(w0[63:32])) / 65536.0 - emx[n]) > 0.1 ||
                        fabs(real'($signed(w0[31:0])) / 65536.0 - emy[n]) > 0.1)) begin
          failures++; $display("FAIL Gaussian %0d mean", n);
        end
        r = int'(w2[15:0]);
        cx = int'($signed(w0[63:32])) >>> 16; cy = int'($signed(w0[31:0])) >>> 16;
        x0 = (cx - r) >>> 6; x1 = ((cx + r) >>> 6) + 1; y0 = (cy - r) >>> 6; y1 = ((cy + r) >>> 6) + 1;
        if (x0 < 0) x0 = 0;
        if (y0 < 0) y0 = 0;
        if (x1 > GW) x1 = GW;
        if (y1 > GH) y1 = GH;
        checks++;
        if (rn != '{x0: 16'(x0), x1: 16'(x1), y0: 16'(y0), y1: 16'(y1)}) begin
          failures++; $display("FAIL Gaussian %0d rectangle", n);
        end
        for (int ty = y0; ty < y1; ty++)
          for (int tx = x0; tx < x1; tx++)
            if (!(tx >= int'(old_r[n].x0) && tx < int'(old_r[n].x1) && ty >= int'(old_r[n].y0) && ty < int'(old_r[n].y1)))
              exp_cnt[ty * GW + tx]++;
      end
    end
    checks++;
    if (culled_count != 32'(n_cull)) begin failures++; $display("FAIL culled %0d exp %0d", culled_count, n_cull); end
    // incoming tables
    tot_over = 0;
    for (int t = 0; t < NT; t++) begin
      int ec;
      bit seen [int];
      seen.delete();
      ec = (exp_cnt[t] > CAP) ? CAP : exp_cnt[t];
      tot_over += exp_cnt[t] - ec;
      @(negedge clk);
      cnt_tile = 16'(t);
      #1;
      checks++;
      if (int'(inc_count) != ec) begin failures++; $display("FAIL tile %0d count %0d exp %0d", t, inc_count, ec); end
      for (int k = 0; k < int'(inc_count) && k < CAP; k++) begin
        entry_t e;
        rect_t rn;
        int id, tx, ty;
        e = entry_t'(u_dram.peek(IB + 32'(t * CAP + k)));
        id = int'(e.id);
        tx = t % GW; ty = t / GW;
        checks++;
        if (id >= NG || seen.exists(id) || !e.valid) begin failures++; $display("FAIL tile %0d bad entry", t); continue; end
        seen[id] = 1;
        rn = rect_t'(u_dram.peek(FB + 32'(id * FEAT_WORDS + 4)));
        if (!(tx >= int'(rn.x0) && tx < int'(rn.x1) && ty >= int'(rn.y0) && ty < int'(rn.y1)) ||
            (tx >= int'(old_r[id].x0) && tx < int'(old_r[id].x1) && ty >= int'(old_r[id].y0) && ty < int'(old_r[id].y1))) begin
          failures++; $display("FAIL tile %0d holds Gaussian %0d wrongly", t, id);
        end
        if (int'(e.depth) != int'(u_dram.peek(FB + 32'(id * FEAT_WORDS + 3)) >> 32)) begin
          failures++; $display("FAIL tile %0d entry depth", t);
        end
      end
    end
    checks++;
    if (overflow != 32'(tot_over) || tot_over == 0) begin failures++; $display("FAIL overflow %0d exp %0d", overflow, tot_over); end
    checks++;
    if (n_cull == 0 || n_cull == NG) begin failures++; $display("FAIL no culling variety"); end
    $display("culled %0d, overflowed entries %0d", n_cull, tot_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
