// Testbench of one Sorting Core with a DRAM model. Each job puts a tile table
// (random depths, about 15% of entries marked invalid) and an incoming table
// in memory and checks, against a reference computed here:
//   - the table after Dynamic Partial Sorting (chunk-wise sorted in place with
//     the odd- or even-frame boundaries),
//   - the merged output (reordered table without invalid entries merged with
//     the fully sorted incoming table) and its length.
// The jobs cover an empty table, an empty incoming table, a table that is one
// partial chunk, and incoming tables longer than a chunk (global merge passes).
module tb_sorting_core;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic job_valid, job_ready, done, req_valid, req_ready, rsp_valid;
  sort_job_t job;
  sort_res_t res;
  mem_req_t req;
  logic [63:0] rsp_data;

  sorting_core dut (.*);
  tb_dram #(.LAT(6), .STALL(20)) u_dram (.clk, .rst_n, .req_valid, .req, .req_ready,
                                          .rsp_valid, .rsp_data);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] TB = 32'h1000, IB = 32'h8000, OB = 32'h10000, SB = 32'h18000;
  bit used [int];

  function automatic int uniq_depth();
    int d;
    do d = 1 + ($urandom % 1000000); while (used.exists(d));
    used[d] = 1;
    return d;
  endfunction

  task automatic run_job(int L, int M, int frame, int shuffle);
    entry_t tbl [$], inc [$], dps [$], exp_o [$], tmp [$];
    int s, e, cyc;
    used.delete();
    // previous-frame table: sorted, then locally disturbed
    for (int i = 0; i < L; i++) tbl.push_back('{valid: ($urandom % 100 >= 15), depth: 31'(uniq_depth()), id: 32'(i)});
    tbl.sort() with (item.depth);
    for (int k = 0; k < shuffle; k++) begin
      int a, b; entry_t t;
      if (L < 2) break;
      a = $urandom % L; b = a + ($urandom % 40) - 20;
      if (b < 0) b = 0;
      if (b >= L) b = L - 1;
      t = tbl[a]; tbl[a] = tbl[b]; tbl[b] = t;
    end
    for (int i = 0; i < M; i++) inc.push_back('{valid: 1'b1, depth: 31'(uniq_depth()), id: 32'(100000 + i)});
    for (int i = 0; i < L; i++) u_dram.mem[TB + 32'(i)] = tbl[i];
    for (int i = 0; i < M; i++) u_dram.mem[IB + 32'(i)] = inc[i];
    // reference DPS
    dps = tbl;
    s = 0;
    e = (frame % 2 == 1) ? 256 : 128;
    while (s < L) begin
      if (e > L) e = L;
      tmp.delete();
      for (int i = s; i < e; i++) tmp.push_back(dps[i]);
      tmp.sort() with (item.depth);
      for (int i = s; i < e; i++) dps[i] = tmp[i - s];
      s = e; e = e + 256;
    end
    // reference merge
    inc.sort() with (item.depth);
    begin
      int x, y;
      entry_t a_f [$];
      x = 0; y = 0;
      foreach (dps[i]) if (dps[i].valid) a_f.push_back(dps[i]);
      while (x < a_f.size() || y < M) begin
        if (y >= M || (x < a_f.size() && a_f[x].depth <= inc[y].depth)) begin exp_o.push_back(a_f[x]); x++; end
        else begin exp_o.push_back(inc[y]); y++; end
      end
    end
    @(negedge clk);
    job = '{tile: 16'(frame), tbl_base: TB, tbl_len: 16'(L), inc_base: IB, inc_len: 16'(M),
            out_base: OB, scr_base: SB, frame: 16'(frame)};
    job_valid = 1;
    @(negedge clk);
    job_valid = 0;
    cyc = 0;
    while (!done && cyc < 400000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("job L=%0d M=%0d timed out", L, M); return; end
    checks++;
    if (res.out_len != 16'(exp_o.size()) || res.tile != 16'(frame)) begin
      failures++;
      $display("job L=%0d M=%0d: out_len %0d expected %0d", L, M, res.out_len, exp_o.size());
    end
    for (int i = 0; i < L; i++) begin
      checks++;
      if (entry_t'(u_dram.peek(TB + 32'(i))) != dps[i]) begin
        failures++;
        if (failures < 10) $display("job L=%0d: DPS table position %0d differs", L, i);
      end
    end
    for (int i = 0; i < exp_o.size(); i++) begin
      checks++;
      if (entry_t'(u_dram.peek(OB + 32'(i))) != exp_o[i]) begin
        failures++;
        if (failures < 10) $display("job L=%0d M=%0d: output position %0d differs", L, M, i);
      end
    end
    $display("job L=%0d M=%0d frame %0d: %0d cycles, %0d entries out", L, M, frame, cyc, exp_o.size());
  endtask

  initial begin
    job_valid = 0; job = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(600, 300, 1, 200);
    run_job(700, 0, 2, 300);
    run_job(0, 40, 3, 0);
    run_job(5, 600, 4, 2);
    run_job(300, 17, 5, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
