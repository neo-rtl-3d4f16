// duplication_unit: emits the incoming-table entries of one Gaussian, that is
// one entry for every tile the Gaussian touches in this frame but did not
// touch in the previous frame.
//
// The Gaussian's tile rectangle of this frame (rect_new, from the projection
// unit) is scanned row by row, one tile per cycle; a tile that also lies in
// the rectangle stored for the previous frame (rect_old, read back from the
// feature table) already holds the Gaussian in its reused table and is
// skipped. This is the verification step the paper adds to duplication: a
// Gaussian is only inserted into tables that do not already contain it.
// Interface: pulse start; entries leave on o_valid/o_ready as (o_tile, o_entry)
// with o_tile = y * grid_w + x; done pulses after the last tile.
// The paper gives the unit's function; testing membership through the
// previous frame's rectangle is this design's choice (it matches the
// table contents because the valid bit written back by rasterization uses the
// same footprint test).
module duplication_unit
  import neo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] id,
  input  logic [30:0] depth,
  input  rect_t       rect_new,
  input  rect_t       rect_old,
  input  logic [15:0] grid_w,
  output logic        o_valid,
  output logic [15:0] o_tile,
  output entry_t      o_entry,
  input  logic        o_ready,
  output logic        busy,
  output logic        done
);
  rect_t rn, ro;
  logic [15:0] x, y;
  logic [31:0] gid;
  logic [30:0] dep;
  logic in_old, last;

  assign in_old  = (x >= ro.x0) && (x < ro.x1) && (y >= ro.y0) && (y < ro.y1);
  assign last    = (x + 1'b1 >= rn.x1) && (y + 1'b1 >= rn.y1);
  assign o_valid = busy && !in_old;
  assign o_tile  = 16'(32'(y) * 32'(grid_w) + 32'(x));
  assign o_entry = '{valid: 1'b1, depth: dep, id: gid};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rn <= '0; ro <= '0; x <= '0; y <= '0;
      gid <= '0; dep <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rn <= rect_new; ro <= rect_old; gid <= id; dep <= depth;
        x <= rect_new.x0; y <= rect_new.y0;
        if (rect_new.x0 < rect_new.x1 && rect_new.y0 < rect_new.y1) busy <= 1'b1;
        else done <= 1'b1;
      end else if (busy && (in_old || o_ready)) begin
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else if (x + 1'b1 >= rn.x1) begin
          x <= rn.x0;
          y <= y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end
endmodule
