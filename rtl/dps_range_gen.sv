// dps_range_gen: chunk ranges of Dynamic Partial Sorting (Algorithm 1 of the
// paper) for one tile table of len entries.
//
// Odd frame numbers use fixed boundaries: [0,C), [C,2C), ...; even frame
// numbers start with a half chunk: [0,C/2), [C/2,3C/2), ..., so that entries
// can cross the previous frame's chunk boundaries. The last range is clipped
// to len. The printed algorithm advances range.start by C after a half first
// chunk, which would skip entries C/2..C-1; the paper's boundary figure shows
// contiguous chunks, and this unit follows the figure (each range starts where
// the previous one ended).
//
// Protocol: pulse start with len and frame. rng_valid/rng_start/rng_end
// present one range at a time; rng_ready takes it. done pulses the cycle after
// the last range is taken (or the cycle after start if len is 0).
module dps_range_gen #(
  parameter int CHUNK = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] len,
  input  logic [15:0] frame,
  output logic        rng_valid,
  output logic [15:0] rng_start,
  output logic [15:0] rng_end,
  input  logic        rng_ready,
  output logic        done
);
  logic [15:0] l;
  logic [16:0] nxt_end;

  assign nxt_end = 17'(rng_end) + 17'(CHUNK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng_valid <= 1'b0; rng_start <= '0; rng_end <= '0; done <= 1'b0; l <= '0;
    end else begin
      done <= 1'b0;
      if (start && !rng_valid) begin
        l <= len;
        rng_start <= '0;
        if (len == 0) begin
          done <= 1'b1;
        end else begin
          rng_valid <= 1'b1;
          if (frame[0]) rng_end <= (len < 16'(CHUNK))     ? len : 16'(CHUNK);
          else          rng_end <= (len < 16'(CHUNK / 2)) ? len : 16'(CHUNK / 2);
        end
      end else if (rng_valid && rng_ready) begin
        if (rng_end >= l) begin
          rng_valid <= 1'b0;
          done      <= 1'b1;
        end else begin
          rng_start <= rng_end;
          rng_end   <= (nxt_end > 17'(l)) ? l : nxt_end[15:0];
        end
      end
    end
  end
endmodule
