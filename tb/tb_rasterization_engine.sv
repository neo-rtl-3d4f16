// Testbench of the Rasterization Engine (4 cores, batches reduced to 16
// entries): a 200x120 screen (4x2 tiles of 64x64, the right and bottom tiles
// partly off screen) is rendered from one set of random Gaussians. Each
// tile's table lists, in depth order, the Gaussians whose footprint square
// touches it. All eight tile jobs are issued back to back; the test checks
// every on-screen pixel against a real-valued blend, the completion counter,
// and that several cores worked at the same time.
module tb_rasterization_engine;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [31:0] FEATB = 32'h0010_0000, TBLB = 32'h0020_0000, FBB = 32'h0030_0000;
  localparam int SW = 200, SH = 120, GW = 4, GH = 2, NG = 60;

  logic job_valid, job_ready, idle, req_valid, req_ready, rsp_valid;
  logic [15:0] done_count;
  rast_job_t job;
  mem_req_t req;
  logic [63:0] rsp_data;

  rasterization_engine #(.NCORES(4), .NB(16)) dut (
    .clk, .rst_n, .feat_base(FEATB), .fb_base(FBB), .screen_w(16'(SW)), .screen_h(16'(SH)),
    .job_valid, .job, .job_ready, .done_count, .idle, .req_valid, .req, .req_ready, .rsp_valid, .rsp_data);
  tb_dram #(.LAT(6), .STALL(10)) u_dram (.clk, .rst_n, .req_valid, .req, .req_ready, .rsp_valid, .rsp_data);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v); return (v < 0) ? -v : v; endfunction

  int max_busy = 0;
  always @(posedge clk) if (rst_n) begin
    int b;
    b = 0;
    for (int i = 0; i < 4; i++) b += int'(!dut.c_job_ready[i]);
    if (b > max_busy) max_busy = b;
  end

  real gmx [NG], gmy [NG], ga [NG], gb [NG], gc [NG], gop [NG];
  int  grad [NG], gr [NG], gg [NG], gbl [NG];

  function automatic bit touches(int n, int x0, int y0, int size);
    int cx, cy;
    cx = int'($floor(gmx[n])); cy = int'($floor(gmy[n]));
    return !(cx + grad[n] < x0 || cx - grad[n] > x0 + size - 1 ||
             cy + grad[n] < y0 || cy - grad[n] > y0 + size - 1);
  endfunction

  initial begin
    int tlen [GW * GH];
    job_valid = 0; job = '0;
    // Gaussians, in depth order (index = depth rank)
    for (int n = 0; n < NG; n++) begin
      logic [31:0] mx, my, ca, cb, cc;
      logic [15:0] op;
      real s1, s2;
      s1 = 1.5 + real'($urandom % 600) / 100.0;
      s2 = 1.5 + real'($urandom % 600) / 100.0;
      mx = 32'(longint'((real'($urandom % 22000) / 100.0 - 10.0) * 65536.0));
      my = 32'(longint'((real'($urandom % 14000) / 100.0 - 10.0) * 65536.0));
      ca = 32'(longint'(16777216.0 / (s1 * s1))); cb = 0; cc = 32'(longint'(16777216.0 / (s2 * s2)));
      op = 16'(13000 + $urandom % 52000);
      gmx[n] = real'($signed(mx)) / 65536.0; gmy[n] = real'($signed(my)) / 65536.0;
      ga[n] = real'(ca) / 16777216.0; gb[n] = 0; gc[n] = real'(cc) / 16777216.0;
      gop[n] = real'(op) / 65536.0;
      grad[n] = int'($ceil(3.0 * ((s1 > s2) ? s1 : s2)));
      gr[n] = $urandom % 256; gg[n] = $urandom % 256; gbl[n] = $urandom % 256;
      u_dram.mem[FEATB + 32'(n * FEAT_WORDS)]     = {mx, my};
      u_dram.mem[FEATB + 32'(n * FEAT_WORDS + 1)] = {ca, cb};
      u_dram.mem[FEATB + 32'(n * FEAT_WORDS + 2)] = {cc, op, 16'(grad[n])};
      u_dram.mem[FEATB + 32'(n * FEAT_WORDS + 3)] = {1'b0, 31'(100 + n), 8'(gr[n]), 8'(gg[n]), 8'(gbl[n]), 8'h0};
    end
    for (int t = 0; t < GW * GH; t++) begin
      tlen[t] = 0;
      for (int n = 0; n < NG; n++)
        if (touches(n, (t % GW) * 64, (t / GW) * 64, 64)) begin
          u_dram.mem[TBLB + 32'(t * 'h1000 + tlen[t])] = {1'b1, 31'(100 + n), 32'(n)};
          tlen[t]++;
        end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < GW * GH; t++) begin
      @(negedge clk);
      job = '{tile_x: 16'(t % GW), tile_y: 16'(t / GW), tbl_base: TBLB + 32'(t * 'h1000), tbl_len: 16'(tlen[t])};
      job_valid = 1;
      @(posedge clk);
      while (!job_ready) @(posedge clk);
      @(negedge clk);
      job_valid = 0;
    end
    while (done_count != 16'(GW * GH)) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL not idle"); end
    for (int y = 0; y < SH; y++)
      for (int x = 0; x < SW; x++) begin
        real T, cr, cg, cb2;
        logic [63:0] w;
        T = 1.0; cr = 0; cg = 0; cb2 = 0;
        for (int n = 0; n < NG; n++) begin
          real dx, dy, al, tn;
          if (!touches(n, x / 8 * 8, y / 8 * 8, 8)) continue;
          dx = real'(x) - gmx[n]; dy = real'(y) - gmy[n];
          al = gop[n] * $exp(-0.5 * (ga[n] * dx * dx + gc[n] * dy * dy));
          if (al > 0.99) al = 0.99;
          if (al < 1.0 / 255.0) continue;
          tn = T * (1.0 - al);
          if (tn < 1.0e-4) break;
          cr += real'(gr[n]) * al * T; cg += real'(gg[n]) * al * T; cb2 += real'(gbl[n]) * al * T;
          T = tn;
        end
        w = u_dram.peek(FBB + 32'(y * SW + x));
        checks++;
        if (fabs(real'(w[48:32]) / 65536.0 - T) > 0.01 || fabs(real'(w[23:16]) - cr) > 3.0 ||
            fabs(real'(w[15:8]) - cg) > 3.0 || fabs(real'(w[7:0]) - cb2) > 3.0) begin
          failures++;
          if (failures < 10) $display("FAIL pixel (%0d,%0d) T=%f exp %f", x, y, real'(w[48:32]) / 65536.0, T);
        end
      end
    checks++;
    if (max_busy < 3) begin failures++; $display("FAIL only %0d cores busy at once", max_busy); end
    $display("cores busy at once: %0d", max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
