// Testbench of the Dynamic Partial Sorting range generator. With chunk size 4
// it reproduces the ten-element example of the paper's boundary figure: three
// frames (odd, even, odd) of chunk-wise sorting must turn 4 3 7 2 6 1 9 0 8 5
// into 2 3 4 7 0 1 6 9 5 8, then 2 3 0 1 4 7 5 6 8 9, then 0 1 ... 9, as
// printed. A second instance with the 256-entry default checks that ranges
// tile [0, len) without gaps for random lengths.
module tb_dps_range_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s4, v4, r4, d4, s256, v256, r256, d256;
  logic [15:0] len4, fr4, st4, en4, len256, fr256, st256, en256;

  dps_range_gen #(.CHUNK(4)) dut4 (.clk, .rst_n, .start(s4), .len(len4), .frame(fr4),
    .rng_valid(v4), .rng_start(st4), .rng_end(en4), .rng_ready(r4), .done(d4));
  dps_range_gen dut (.clk, .rst_n, .start(s256), .len(len256), .frame(fr256),
    .rng_valid(v256), .rng_start(st256), .rng_end(en256), .rng_ready(r256), .done(d256));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int v [10] = '{4, 3, 7, 2, 6, 1, 9, 0, 8, 5};
  int exp1 [10] = '{2, 3, 4, 7, 0, 1, 6, 9, 5, 8};
  int exp2 [10] = '{2, 3, 0, 1, 4, 7, 5, 6, 8, 9};
  int exp3 [10] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9};

  task automatic sort_range(int a, int b);
    for (int i = a + 1; i < b; i++) begin
      int k, j;
      k = v[i]; j = i - 1;
      while (j >= a && v[j] > k) begin v[j+1] = v[j]; j--; end
      v[j+1] = k;
    end
  endtask

  initial begin
    s4 = 0; r4 = 0; s256 = 0; r256 = 0; len4 = 0; fr4 = 0; len256 = 0; fr256 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 1; f <= 3; f++) begin
      int cyc;
      @(negedge clk);
      len4 = 10; fr4 = 16'(f); s4 = 1;
      @(negedge clk);
      s4 = 0; r4 = 1; cyc = 0;
      while (!d4 && cyc < 100) begin
        if (v4) sort_range(int'(st4), int'(en4));
        @(negedge clk); cyc++;
      end
      r4 = 0;
      for (int i = 0; i < 10; i++) begin
        checks++;
        if (v[i] != ((f == 1) ? exp1[i] : (f == 2) ? exp2[i] : exp3[i])) begin
          failures++;
          $display("frame %0d position %0d: %0d", f, i, v[i]);
        end
      end
    end
    for (int t = 0; t < 60; t++) begin
      int l, nxt, cyc, nr;
      l = (t < 4) ? t : $urandom % 3000;
      @(negedge clk);
      len256 = 16'(l); fr256 = 16'(t); s256 = 1;
      @(negedge clk);
      s256 = 0; r256 = 1; nxt = 0; cyc = 0; nr = 0;
      while (!d256 && cyc < 100) begin
        if (v256) begin
          int want;
          want = (nr == 0) ? ((t % 2 == 1) ? 256 : 128) : 256;
          checks++;
          if (int'(st256) != nxt || int'(en256) != ((nxt + want > l) ? l : nxt + want)) begin
            failures++;
            $display("len %0d range %0d: [%0d,%0d)", l, nr, st256, en256);
          end
          nxt = int'(en256); nr++;
        end
        @(negedge clk); cyc++;
      end
      r256 = 0;
      checks++;
      if (nxt != l) begin failures++; $display("len %0d covered only %0d", l, nxt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
