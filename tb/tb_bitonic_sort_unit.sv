// Testbench of the Bitonic Sorting Unit: random 16-entry sub-chunks, checked
// against a reference insertion sort (depth order and the set of IDs), and the
// one-cycle latency.
module tb_bitonic_sort_unit;
  import neo_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  entry_t in_data [N];
  entry_t out_data [N];
  int checks = 0, failures = 0;

  bitonic_sort_unit #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    entry_t ref_s [N];
    in_valid = 0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        in_data[i].valid = 1'($urandom);
        in_data[i].depth = (t % 3 == 0) ? 31'($urandom % 8) : 31'($urandom);
        in_data[i].id    = 32'(t * 100 + i);
        ref_s[i] = in_data[i];
      end
      // reference insertion sort by depth
      for (int i = 1; i < N; i++) begin
        entry_t k; int j;
        k = ref_s[i]; j = i - 1;
        while (j >= 0 && ref_s[j].depth > k.depth) begin ref_s[j+1] = ref_s[j]; j--; end
        ref_s[j+1] = k;
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing after 1 cycle"); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_data[i].depth != ref_s[i].depth) begin
          failures++;
          if (failures < 10) $display("t=%0d pos %0d depth %0d exp %0d", t, i, out_data[i].depth, ref_s[i].depth);
        end
      end
      // same multiset of ids
      begin
        longint sum_o, sum_r, x_o, x_r;
        sum_o = 0; sum_r = 0; x_o = 0; x_r = 0;
        for (int i = 0; i < N; i++) begin
          sum_o += out_data[i].id; sum_r += ref_s[i].id;
          x_o ^= {out_data[i].valid, out_data[i].depth, out_data[i].id} * 7919;
          x_r ^= {ref_s[i].valid, ref_s[i].depth, ref_s[i].id} * 7919;
        end
        checks++;
        if (sum_o != sum_r || x_o != x_r) begin failures++; $display("entries lost"); end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("out_valid held too long"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
