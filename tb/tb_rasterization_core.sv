// Testbench of one Rasterization Core (64x64 tiles, 8x8 subtiles, 4 ITU +
// 4 SCU, batches reduced to 8 entries so that a table spans several batches).
// Two tiles of a 100x100 screen are rendered from random depth-ordered tables
// whose Gaussians lie around, partly outside, the tile; some are stacked
// opaque Gaussians so that pixels terminate early. Checks:
//   every frame-buffer pixel against a real-valued front-to-back blend that
//   applies a Gaussian only to subtiles its square footprint touches
//   (T within 0.01, colour within 3 codes), and no writes off screen;
//   the written-back table: valid = footprint touches the tile, depth = the
//   depth from the feature table (deferred update), ids unchanged;
//   that ITU and SCU work overlapped in time, and that pixels terminated.
module tb_rasterization_core;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NB = 8;
  localparam logic [31:0] FEATB = 32'h0010_0000, TBLB = 32'h0020_0000, FBB = 32'h0030_0000;
  localparam int SW = 100, SH = 100;

  logic job_valid, job_ready, done, req_valid, req_ready, rsp_valid;
  rast_job_t job;
  mem_req_t req;
  logic [63:0] rsp_data;

  rasterization_core #(.NB(NB)) dut (
    .clk, .rst_n, .feat_base(FEATB), .fb_base(FBB), .screen_w(16'(SW)), .screen_h(16'(SH)),
    .job_valid, .job, .job_ready, .done, .req_valid, .req, .req_ready, .rsp_valid, .rsp_data);
  tb_dram #(.LAT(6), .STALL(20)) u_dram (.clk, .rst_n, .req_valid, .req, .req_ready, .rsp_valid, .rsp_data);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_overlap = 0;
  always @(posedge clk)
    if (dut.state == 4'd5 && !dut.itu_fin && !dut.scu_fin) n_overlap++;   // 5 = R_RUN

  function automatic real fabs(real v); return (v < 0) ? -v : v; endfunction

  typedef struct { real mx, my, a, b, c, op; int rad, r, g, b8, depth; } gs_t;

  int n_term = 0;

  task automatic run_tile(int tx, int ty, int ng, int id0);
    gs_t gs [$];
    int order [$];
    int depths [$];
    // build Gaussians
    for (int n = 0; n < ng; n++) begin
      gs_t G;
      real s1, s2;
      bit stack;
      stack = (n % 5 == 0);
      G.mx = real'(tx * 64) + (stack ? 20.0 + n % 3 : real'($urandom % 9600) / 100.0 - 16.0);
      G.my = real'(ty * 64) + (stack ? 30.0 + n % 2 : real'($urandom % 9600) / 100.0 - 16.0);
      s1 = 1.0 + real'($urandom % 400) / 100.0;
      s2 = 1.0 + real'($urandom % 400) / 100.0;
      G.a = 1.0 / (s1 * s1); G.b = 0.0; G.c = 1.0 / (s2 * s2);
      if (n % 3 == 1) G.b = 0.3 * $sqrt(G.a * G.c);
      G.op = stack ? 0.99 : 0.2 + real'($urandom % 790) / 1000.0;
      G.rad = int'($ceil(3.0 * ((s1 > s2) ? s1 : s2)));
      G.r = $urandom % 256; G.g = $urandom % 256; G.b8 = $urandom % 256;
      G.depth = 1000 + 97 * n + int'($urandom % 50);
      gs.push_back(G);
    end
    // features in memory; the table lists them in depth order with stale depths
    foreach (gs[n]) begin
      logic [31:0] mx, my, ca, cb, cc;
      logic [15:0] op;
      logic [63:0] base;
      mx = 32'(longint'(gs[n].mx * 65536.0)); my = 32'(longint'(gs[n].my * 65536.0));
      ca = 32'(longint'(gs[n].a * 16777216.0)); cb = 32'(longint'(gs[n].b * 16777216.0));
      cc = 32'(longint'(gs[n].c * 16777216.0));
      op = 16'(int'(gs[n].op * 65535.0));
      // keep the reference on the quantised values
      gs[n].mx = real'($signed(mx)) / 65536.0; gs[n].my = real'($signed(my)) / 65536.0;
      gs[n].a = real'($signed(ca)) / 16777216.0; gs[n].b = real'($signed(cb)) / 16777216.0;
      gs[n].c = real'($signed(cc)) / 16777216.0; gs[n].op = real'(op) / 65536.0;
      base = 64'(FEATB) + 64'((id0 + n) * FEAT_WORDS);
      u_dram.mem[32'(base)]     = {mx, my};
      u_dram.mem[32'(base + 1)] = {ca, cb};
      u_dram.mem[32'(base + 2)] = {cc, op, 16'(gs[n].rad)};
      u_dram.mem[32'(base + 3)] = {1'b0, 31'(gs[n].depth), 8'(gs[n].r), 8'(gs[n].g), 8'(gs[n].b8), 8'h0};
      u_dram.mem[32'(TBLB) + 32'(n)] = {1'b1, 31'(gs[n].depth + 5 - int'($urandom % 11)), 32'(id0 + n)};
    end
    @(negedge clk);
    job = '{tile_x: 16'(tx), tile_y: 16'(ty), tbl_base: TBLB, tbl_len: 16'(ng)};
    job_valid = 1;
    @(posedge clk);
    while (!job_ready) @(posedge clk);
    @(negedge clk);
    job_valid = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    // pixels
    for (int y = ty * 64; y < ty * 64 + 64; y++) begin
      for (int x = tx * 64; x < tx * 64 + 64; x++) begin
        real T, cr, cg, cb2;
        bit fin;
        logic [63:0] w;
        int sx0, sy0;
        T = 1.0; cr = 0; cg = 0; cb2 = 0; fin = 0;
        sx0 = x / 8 * 8; sy0 = y / 8 * 8;
        foreach (gs[n]) begin
          real dx, dy, q, al, tn;
          int cx, cy;
          cx = int'($floor(gs[n].mx)); cy = int'($floor(gs[n].my));
          if (fin) break;
          if (cx + gs[n].rad < sx0 || cx - gs[n].rad > sx0 + 7 || cy + gs[n].rad < sy0 || cy - gs[n].rad > sy0 + 7) continue;
          dx = real'(x) - gs[n].mx; dy = real'(y) - gs[n].my;
          q = gs[n].a * dx * dx + 2.0 * gs[n].b * dx * dy + gs[n].c * dy * dy;
          al = gs[n].op * $exp(-0.5 * q);
          if (al > 0.99) al = 0.99;
          if (al < 1.0 / 255.0) continue;
          tn = T * (1.0 - al);
          if (tn < 1.0e-4) begin fin = 1; break; end
          cr += real'(gs[n].r) * al * T; cg += real'(gs[n].g) * al * T; cb2 += real'(gs[n].b8) * al * T;
          T = tn;
        end
        if (fin) n_term++;
        if (x >= SW || y >= SH) begin
          checks++;
          if (u_dram.mem.exists(FBB + 32'(y * SW + x))) begin failures++; $display("FAIL off-screen write"); end
          continue;
        end
        w = u_dram.peek(FBB + 32'(y * SW + x));
        checks++;
        if (fabs(real'(w[48:32]) / 65536.0 - T) > 0.01 || fabs(real'(w[23:16]) - cr) > 3.0 ||
            fabs(real'(w[15:8]) - cg) > 3.0 || fabs(real'(w[7:0]) - cb2) > 3.0) begin
          failures++;
          if (failures < 10) $display("FAIL pixel (%0d,%0d) T=%f rgb=%0d %0d %0d exp T=%f rgb=%f %f %f", x, y,
                                      real'(w[48:32]) / 65536.0, w[23:16], w[15:8], w[7:0], T, cr, cg, cb2);
        end
      end
    end
    // written-back table
    foreach (gs[n]) begin
      entry_t e;
      bit v;
      int cx, cy;
      cx = int'($floor(gs[n].mx)); cy = int'($floor(gs[n].my));
      v = !(cx + gs[n].rad < tx * 64 || cx - gs[n].rad > tx * 64 + 63 ||
            cy + gs[n].rad < ty * 64 || cy - gs[n].rad > ty * 64 + 63);
      e = entry_t'(u_dram.peek(TBLB + 32'(n)));
      checks++;
      if (e.valid != v || int'(e.depth) != gs[n].depth || int'(e.id) != id0 + n) begin
        failures++;
        if (failures < 10) $display("FAIL write-back %0d: v=%b exp %b depth %0d exp %0d", n, e.valid, v, e.depth, gs[n].depth);
      end
    end
  endtask

  initial begin
    job_valid = 0; job = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(0, 0, 30, 0);
    run_tile(1, 1, 45, 100);
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL ITU and SCU never overlapped"); end
    checks++;
    if (n_term == 0) begin failures++; $display("FAIL no pixel terminated"); end
    $display("ITU/SCU overlap cycles %0d, terminated pixels %0d", n_overlap, n_term);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
