// Full-size testbench: the accelerator with every parameter at its default
// (2560x1440 screen, 40x23 = 920 tiles of 64x64, 16 sorting cores, 4
// rasterization cores, 4 preprocessing lanes, 256-entry chunks) renders one
// frame of 400 random Gaussians, some behind the camera and a stack of opaque
// ones. Checks: the frame completes; for every tile the table holds each
// Gaussian that touches the tile exactly once, with valid bits matching the
// footprints, and is fully depth-sorted; the pixels of every seventh tile match
// a real-valued blend (T within 0.01, colour within 3 codes); culling,
// early pixel termination and ITU/SCU overlap occurred.
module tb_neo_full;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int SW = 2560, SH = 1440, GW = 40, GH = 23, NT = GW * GH, NG = 400, NFR = 1;
  localparam int CH = 256, TCAP = 8192, ICAP = 8192;
  localparam logic [31:0] GB = 32'h0000_0000, FB = 32'h0100_0000, T0 = 32'h0200_0000,
                          T1 = 32'h0300_0000, FBUF = 32'h0600_0000;

  logic start, busy, frame_done, dram_req_valid, dram_req_ready, dram_rsp_valid;
  camera_t cam;
  logic [31:0] num_gauss, inc_overflow, tbl_drop, culled_count;
  logic [15:0] frame_no;
  mem_req_t dram_req;
  logic [63:0] dram_rsp_data;

  neo_top dut (.*);
  tb_dram #(.LAT(8), .STALL(10)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req(dram_req),
                                         .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid),
                                         .rsp_data(dram_rsp_data));

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v); return (v < 0) ? -v : v; endfunction

  // ---------------------------------------------------------------- mechanism counters
  int n_dps_odd = 0, n_dps_even = 0, n_insert = 0, n_gmerge = 0, n_overlap = 0, n_stall = 0;
  int n_delete = 0, n_term = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.sj_valid && dut.sj_ready) begin
      if (dut.sj.tbl_len > 16'(CH / 2)) begin
        if (dut.sj.frame[0]) n_dps_odd++; else n_dps_even++;
      end
      if (dut.sj.tbl_len != 0 && dut.sj.inc_len != 0) n_insert++;
      if (dut.sj.inc_len > 16'(CH)) n_gmerge++;
    end
    // 5 = R_RUN of the rasterization core
    if (dut.u_rast.g_core[0].u_core.state == 4'd5 && !dut.u_rast.g_core[0].u_core.itu_fin &&
        !dut.u_rast.g_core[0].u_core.scu_fin) n_overlap++;
    if (dram_req_valid && !dram_req_ready) n_stall++;
  end

  // ---------------------------------------------------------------- checks
  int prev_valid [NT];
  int inc_seen [NT];
  always @(posedge clk) if (rst_n && dut.sj_valid && dut.sj_ready) inc_seen[int'(dut.sj.tile)] = int'(dut.sj.inc_len);

  function automatic bit touches(int id, int x0, int y0, int size);
    logic [63:0] w0, w2;
    int cx, cy, r;
    w0 = u_dram.peek(FB + 32'(id * FEAT_WORDS));
    w2 = u_dram.peek(FB + 32'(id * FEAT_WORDS + 2));
    r = int'(w2[15:0]);
    if (r == 0) return 0;
    cx = int'($signed(w0[63:32])) >>> 16; cy = int'($signed(w0[31:0])) >>> 16;
    return !(cx + r < x0 || cx - r > x0 + size - 1 || cy + r < y0 || cy - r > y0 + size - 1);
  endfunction

  task automatic check_frame(int f, logic [31:0] tb_base);
    int inv_tot, pairs;
    inv_tot = 0; pairs = 0;
    for (int t = 0; t < NT; t++) begin
      int len, nvalid, ninv;
      bit seen [int];
      int ids [$];
      len = int'(dut.tlen[t]);
      nvalid = 0; ninv = 0;
      seen.delete(); ids.delete();
      for (int k = 0; k < len; k++) begin
        entry_t e, p;
        e = entry_t'(u_dram.peek(tb_base + 32'(t * TCAP + k)));
        checks++;
        if (seen.exists(int'(e.id)) || int'(e.id) >= NG) begin failures++; $display("FAIL frame %0d tile %0d duplicate/bad id", f, t); end
        seen[int'(e.id)] = 1;
        ids.push_back(int'(e.id));
        checks++;
        if (e.valid != touches(int'(e.id), (t % GW) * 64, (t / GW) * 64, 64)) begin
          failures++; $display("FAIL frame %0d tile %0d id %0d valid %b", f, t, e.id, e.valid);
        end
        if (e.valid) nvalid++; else n_delete++;
        if (k > 0) begin
          p = entry_t'(u_dram.peek(tb_base + 32'(t * TCAP + k - 1)));
          pairs++;
          if (p.depth > e.depth) ninv++;
        end
      end
      // every Gaussian that touches the tile is in the table
      for (int id = 0; id < NG; id++) begin
        if (touches(id, (t % GW) * 64, (t / GW) * 64, 64)) begin
          checks++;
          if (!seen.exists(id)) begin failures++; $display("FAIL frame %0d tile %0d misses Gaussian %0d", f, t, id); end
        end
      end
      checks++;
      if (len != prev_valid[t] + inc_seen[t]) begin
        failures++; $display("FAIL frame %0d tile %0d length %0d exp %0d + %0d", f, t, len, prev_valid[t], inc_seen[t]);
      end
      if (f == 1) begin
        checks++;
        if (ninv != 0) begin failures++; $display("FAIL first-frame table %0d not sorted", t); end
      end
      inv_tot += ninv;
      prev_valid[t] = nvalid;
      // on-screen pixels of every seventh tile, blended in table order (the
      // bottom tile row is half off-screen: 1440 = 22.5 x 64)
      if (t % 7 != 0) continue;
      for (int y = (t / GW) * 64; y < (t / GW) * 64 + 64 && y < SH; y++)
        for (int x = (t % GW) * 64; x < (t % GW) * 64 + 64 && x < SW; x++) begin
          real T, cr, cg, cb;
          logic [63:0] w;
          bit amb;
          T = 1.0; cr = 0; cg = 0; cb = 0; amb = 0;
          foreach (ids[k]) begin
            logic [63:0] w0, w1, w2, w3;
            real dx, dy, q, al, tn;
            int id;
            id = ids[k];
            if (!touches(id, x / 8 * 8, y / 8 * 8, 8)) continue;
            w0 = u_dram.peek(FB + 32'(id * FEAT_WORDS));
            w1 = u_dram.peek(FB + 32'(id * FEAT_WORDS + 1));
            w2 = u_dram.peek(FB + 32'(id * FEAT_WORDS + 2));
            w3 = u_dram.peek(FB + 32'(id * FEAT_WORDS + 3));
            dx = real'(x) - real'($signed(w0[63:32])) / 65536.0;
            dy = real'(y) - real'($signed(w0[31:0])) / 65536.0;
            q = (real'($signed(w1[63:32])) * dx * dx + 2.0 * real'($signed(w1[31:0])) * dx * dy +
                 real'($signed(w2[63:32])) * dy * dy) / 16777216.0;
            al = real'(w2[31:16]) / 65536.0 * $exp(-0.5 * q);
            if (al > 0.99) al = 0.99;
            if (q < 0 || al < 1.0 / 255.0) continue;
            tn = T * (1.0 - al);
            // too close to the termination threshold for a fixed-point match
            if (tn > 0.7e-4 && tn < 1.5e-4) amb = 1;
            if (tn < 1.0e-4) begin n_term++; break; end
            cr += real'(w3[31:24]) * al * T; cg += real'(w3[23:16]) * al * T; cb += real'(w3[15:8]) * al * T;
            T = tn;
          end
          w = u_dram.peek(FBUF + 32'(y * SW + x));
          if (amb) continue;
          checks++;
          if (fabs(real'(w[48:32]) / 65536.0 - T) > 0.01 || fabs(real'(w[23:16]) - cr) > 3.0 ||
              fabs(real'(w[15:8]) - cg) > 3.0 || fabs(real'(w[7:0]) - cb) > 3.0) begin
            failures++;
            if (failures < 20) $display("FAIL frame %0d pixel (%0d,%0d) T=%f exp %f", f, x, y, real'(w[48:32]) / 65536.0, T);
          end
        end
    end
    $display("frame %0d: adjacent depth inversions %0d of %0d pairs, culled %0d", f, inv_tot, pairs, culled_count);
  endtask

  initial begin
    start = 0; num_gauss = NG; cam = '0;
    cam.rot[8] = 32'h4000_0000; cam.rot[4] = 32'h4000_0000; cam.rot[0] = 32'h4000_0000;
    cam.fx = 2000 <<< 16; cam.fy = 2000 <<< 16; cam.cx = 1280 <<< 16; cam.cy = 720 <<< 16;
    for (int t = 0; t < NT; t++) begin prev_valid[t] = 0; inc_seen[t] = 0; end
    for (int n = 0; n < NG; n++) begin
      int xi, yi, zi, si, v;
      xi = int'($urandom % 100000) - 50000;
      yi = int'($urandom % 50000) - 25000;
      zi = (n % 16 == 0) ? -20000 : 40000 + int'($urandom % 150000);
      si = 300 + int'($urandom % 1500);
      // a stack of four opaque Gaussians, so that pixels terminate early
      if (n % 16 >= 1 && n % 16 <= 4 && n < 32) begin
        xi = (n < 16) ? -20000 : 30000; yi = 4000; zi = 60000 + 1000 * (n % 16); si = 2500;
      end
      v = si * si / 65536;
      u_dram.mem[GB + 32'(n * GAUSS_WORDS)]     = {32'(xi), 32'(yi)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 1)] = {32'(zi), (n % 16 >= 1 && n % 16 <= 4 && n < 32) ? 16'hFFFF : 16'(20000 + $urandom % 45000), 16'h0};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 2)] = {32'(v), 32'(v / 3)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 3)] = {32'h0, 32'(v)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 4)] = {32'h0, 32'(v)};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 5)] = {16'($urandom % 8192) - 16'd4096, 16'($urandom % 8192) - 16'd4096,
                                                   16'($urandom % 8192) - 16'd4096, 16'($urandom % 2048) - 16'd1024};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 6)] = {16'($urandom % 2048) - 16'd1024, 16'($urandom % 2048) - 16'd1024,
                                                   16'($urandom % 2048) - 16'd1024, 16'($urandom % 2048) - 16'd1024};
      u_dram.mem[GB + 32'(n * GAUSS_WORDS + 7)] = {16'($urandom % 2048) - 16'd1024, 16'($urandom % 2048) - 16'd1024,
                                                   16'($urandom % 2048) - 16'd1024, 16'($urandom % 2048) - 16'd1024};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 1; f <= NFR; f++) begin
      int cyc;
      @(negedge clk);
      // camera moves along x and turns about the y axis by 0.06 rad a frame
      begin
        real ang;
        ang = 0.06 * real'(f - 1);
        cam.rot[8] = 32'(longint'($cos(ang) * 1073741824.0));
        cam.rot[6] = 32'(longint'($sin(ang) * 1073741824.0));
        cam.rot[2] = 32'(longint'(-$sin(ang) * 1073741824.0));
        cam.rot[0] = 32'(longint'($cos(ang) * 1073741824.0));
      end
      cam.trans[2] = 32'(-(f - 1) * 9000);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!frame_done) begin @(negedge clk); cyc++; end
      $display("frame %0d took %0d cycles", f, cyc);
      checks++;
      if (frame_no != 16'(f + 1)) begin failures++; $display("FAIL frame number"); end
      check_frame(f, (f % 2 == 1) ? T1 : T0);
    end
    checks++;
    if (inc_overflow != 0 || tbl_drop != 0) begin failures++; $display("FAIL unexpected overflow"); end
    $display("mechanisms: DPS odd %0d, DPS even %0d, insertion %0d, deletion %0d, global merge %0d,",
             n_dps_odd, n_dps_even, n_insert, n_delete, n_gmerge);
    $display("            ITU/SCU overlap %0d, pixel termination %0d, culled %0d, DRAM stalls %0d",
             n_overlap, n_term, culled_count, n_stall);
    if (culled_count == 0) begin failures++; $display("FAIL no culling"); end
    if (n_term == 0)       begin failures++; $display("FAIL no pixel termination"); end
    if (n_overlap == 0)    begin failures++; $display("FAIL no ITU/SCU overlap"); end
    checks += 3;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
