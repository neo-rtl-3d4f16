// Testbench of the MSU+: merges random sorted streams of random lengths with
// random valid bits and random stalls on both inputs and the output, with the
// invalid filter on and off, against a reference merge.
module tb_msu_plus;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, filter_en, a_valid, a_ready, b_valid, b_ready, o_valid, o_ready, busy, done;
  logic [15:0] len_a, len_b, out_count;
  entry_t a_data, b_data, o_data;
  int checks = 0, failures = 0;

  msu_plus dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  entry_t qa [$], qb [$], exp_q [$], got [$];
  int ia, ib;

  always @(posedge clk) begin
    if (a_valid && a_ready) ia <= ia + 1;
    if (b_valid && b_ready) ib <= ib + 1;
    if (o_valid && o_ready) got.push_back(o_data);
  end
  assign a_data = (ia < qa.size()) ? qa[ia] : '0;
  assign b_data = (ib < qb.size()) ? qb[ib] : '0;

  initial begin
    start = 0; filter_en = 0; len_a = 0; len_b = 0; a_valid = 0; b_valid = 0; o_ready = 0;
    ia = 0; ib = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int na, nb, d, cyc;
      bit f;
      na = (t % 7 == 0) ? 0 : $urandom % 40;
      nb = (t % 5 == 0) ? 0 : $urandom % 40;
      f  = t[0];
      qa.delete(); qb.delete(); exp_q.delete(); got.delete();
      d = 0;
      for (int i = 0; i < na; i++) begin
        d += $urandom % 5;
        qa.push_back('{valid: ($urandom % 4 != 0), depth: 31'(d), id: 32'(1000 + i)});
      end
      d = 0;
      for (int i = 0; i < nb; i++) begin
        d += $urandom % 5;
        qb.push_back('{valid: ($urandom % 4 != 0), depth: 31'(d), id: 32'(5000 + i)});
      end
      // reference: stable merge, A first on ties, then filter
      begin
        int x, y;
        x = 0; y = 0;
        while (x < na || y < nb) begin
          entry_t e;
          if (y >= nb || (x < na && qa[x].depth <= qb[y].depth)) begin e = qa[x]; x++; end
          else begin e = qb[y]; y++; end
          if (!f || e.valid) exp_q.push_back(e);
        end
      end
      @(negedge clk);
      ia = 0; ib = 0;
      len_a = 16'(na); len_b = 16'(nb); filter_en = f; start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 2000) begin
        a_valid = (ia < na) && ($urandom % 3 != 0);
        b_valid = (ib < nb) && ($urandom % 3 != 0);
        o_ready = ($urandom % 4 != 0);
        @(negedge clk);
        cyc++;
      end
      a_valid = 0; b_valid = 0; o_ready = 0;
      checks++;
      if (!done) begin failures++; $display("merge %0d did not finish", t); end
      checks++;
      if (got.size() != exp_q.size() || out_count != 16'(exp_q.size())) begin
        failures++;
        $display("merge %0d: %0d entries out, count %0d, expected %0d", t, got.size(), out_count, exp_q.size());
      end else begin
        for (int i = 0; i < exp_q.size(); i++) begin
          checks++;
          if (got[i] != exp_q[i]) begin
            failures++;
            if (failures < 10) $display("merge %0d pos %0d got id %0d exp id %0d", t, i, got[i].id, exp_q[i].id);
          end
        end
      end
    end
    // full-rate check: no stalls, 32 + 32 entries leave in about 64 cycles
    begin
      int cyc;
      qa.delete(); qb.delete(); got.delete();
      for (int i = 0; i < 32; i++) begin
        qa.push_back('{valid: 1'b1, depth: 31'(2 * i), id: 32'(i)});
        qb.push_back('{valid: 1'b1, depth: 31'(2 * i + 1), id: 32'(100 + i)});
      end
      @(negedge clk);
      ia = 0; ib = 0; len_a = 32; len_b = 32; filter_en = 0; start = 1;
      a_valid = 1; b_valid = 1; o_ready = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 500) begin
        a_valid = (ia < 32); b_valid = (ib < 32);
        @(negedge clk); cyc++;
      end
      checks++;
      if (cyc > 64 + 8) begin failures++; $display("merge of 64 took %0d cycles", cyc); end
      checks++;
      if (got.size() != 64) begin failures++; $display("full-rate merge lost entries"); end
      else for (int i = 0; i < 64; i++) begin
        checks++;
        if (got[i].depth != 31'(i)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
