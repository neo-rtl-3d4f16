// Testbench of the Sorting Engine (16 cores, defaults): 40 tile jobs with
// random table and incoming sizes are issued back to back; every result
// (tile, length) and every merged table in memory is checked against the
// reference model, and the test checks that cores ran concurrently.
module tb_sorting_engine;
  import neo_pkg::*;
  import tb_sort_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic job_valid, job_ready, res_valid, res_ready, idle, req_valid, req_ready, rsp_valid;
  sort_job_t job;
  sort_res_t res;
  mem_req_t req;
  logic [63:0] rsp_data;

  sorting_engine dut (.*);
  tb_dram #(.LAT(5), .STALL(10)) u_dram (.clk, .rst_n, .req_valid, .req, .req_ready,
                                          .rsp_valid, .rsp_data);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NT = 40;
  eq_t exp_o [NT];
  int  got_len [NT];
  int  nres, max_busy;
  bit  used [int];
  int  lens [NT], incs [NT];

  always @(posedge clk) if (rst_n) begin
    int b;
    b = 0;
    for (int i = 0; i < 16; i++) b += int'(!dut.c_job_ready[i]);
    if (b > max_busy) max_busy = b;
    if (res_valid && res_ready) begin
      got_len[res.tile[5:0]] = int'(res.out_len);
      nres++;
    end
  end

  initial begin
    job_valid = 0; job = '0; res_ready = 1; nres = 0; max_busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      eq_t tbl, inc;
      int L, M, d;
      tbl.delete(); inc.delete();
      L = $urandom % 400; M = $urandom % 300;
      lens[t] = L; incs[t] = M;
      for (int i = 0; i < L; i++) begin
        do d = 1 + $urandom % 10000000; while (used.exists(d));
        used[d] = 1;
        tbl.push_back('{valid: ($urandom % 10 != 0), depth: 31'(d), id: 32'(t * 1000 + i)});
      end
      for (int i = 0; i < M; i++) begin
        do d = 1 + $urandom % 10000000; while (used.exists(d));
        used[d] = 1;
        inc.push_back('{valid: 1'b1, depth: 31'(d), id: 32'(t * 1000 + 500 + i)});
      end
      foreach (tbl[i]) u_dram.mem[32'h10_0000 * 32'(t) + 32'(i)] = tbl[i];
      foreach (inc[i]) u_dram.mem[32'h10_0000 * 32'(t) + 32'h1000 + 32'(i)] = inc[i];
      exp_o[t] = merge_ref(dps_ref(tbl, t + 1, 256), inc);
      got_len[t] = -1;
    end
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      job = '{tile: 16'(t), tbl_base: 32'h10_0000 * 32'(t), tbl_len: 16'(lens[t]),
              inc_base: 32'h10_0000 * 32'(t) + 32'h1000, inc_len: 16'(incs[t]),
              out_base: 32'h10_0000 * 32'(t) + 32'h4000, scr_base: 32'h10_0000 * 32'(t) + 32'h8000,
              frame: 16'(t + 1)};
      job_valid = 1;
      do @(posedge clk); while (!job_ready);
      @(negedge clk);
      job_valid = 0;
    end
    wait (nres == NT);
    repeat (5) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL engine not idle"); end
    for (int t = 0; t < NT; t++) begin
      checks++;
      if (got_len[t] != exp_o[t].size()) begin
        failures++; $display("FAIL tile %0d len %0d exp %0d", t, got_len[t], exp_o[t].size());
      end
      foreach (exp_o[t][i]) begin
        checks++;
        if (u_dram.peek(32'h10_0000 * 32'(t) + 32'h4000 + 32'(i)) != exp_o[t][i]) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d entry %0d", t, i);
        end
      end
    end
    checks++;
    if (max_busy < 8) begin failures++; $display("FAIL only %0d cores busy at once", max_busy); end
    $display("max cores busy at once: %0d", max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
