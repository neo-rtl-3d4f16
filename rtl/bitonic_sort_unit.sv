// bitonic_sort_unit (BSU): sorts one N-entry sub-chunk of Gaussian table
// entries by ascending depth (nearest first) with a bitonic sorting network.
//
// The Sorting Core cuts each 256-entry chunk into 16-entry sub-chunks and
// feeds them to this unit one per cycle; the merge unit then merges the
// sorted sub-chunks. The network (log2(N)*(log2(N)+1)/2 compare-exchange
// stages, 10 for N=16) is combinational and its result is registered, so a
// sub-chunk accepted in cycle t is available in cycle t+1 with out_valid.
// Throughput is one sub-chunk per cycle. The unit and its 16-entry width
// follow the paper; the single pipeline register is this design's choice.
// Equal depths may leave the unit in any order (bitonic sorting is not stable).
module bitonic_sort_unit
  import neo_pkg::*;
#(
  parameter int N = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  entry_t in_data  [N],
  output logic   out_valid,
  output entry_t out_data [N]
);
  entry_t net [N];

  always_comb begin
    entry_t tmp;
    int     l;
    tmp = '0;
    l   = 0;
    for (int i = 0; i < N; i++) net[i] = in_data[i];
    for (int k = 2; k <= N; k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < N; i++) begin
          l = i ^ j;
          if (l > i) begin
            // ascending where bit k of i is clear, descending elsewhere
            if (((i & k) == 0) ? (net[i].depth > net[l].depth)
                               : (net[i].depth < net[l].depth)) begin
              tmp    = net[i];
              net[i] = net[l];
              net[l] = tmp;
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_data <= net;
  end
endmodule
