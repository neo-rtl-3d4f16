// Testbench of the duplication unit: random new and previous tile rectangles
// (overlapping, disjoint, equal and empty) on a 40-wide grid. The emitted
// tiles must be exactly the tiles of the new rectangle that are outside the
// old one, in row-major order, each carrying the Gaussian's id and depth; the
// output is stalled at random, and the rate of one tile per cycle without
// stalls is checked.
module tb_duplication_unit;
  import neo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, o_valid, o_ready, busy, done;
  logic [31:0] id;
  logic [30:0] depth;
  rect_t rect_new, rect_old;
  logic [15:0] grid_w, o_tile;
  entry_t o_entry;
  duplication_unit dut (.*);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q [$];
  int stall_pct;
  always @(negedge clk) o_ready = ($urandom % 100) >= stall_pct;

  function automatic rect_t rnd_rect();
    rect_t r;
    r.x0 = 16'($urandom % 40); r.x1 = r.x0 + 16'($urandom % 6);
    r.y0 = 16'($urandom % 23); r.y1 = r.y0 + 16'($urandom % 6);
    if (r.x1 > 40) r.x1 = 40;
    if (r.y1 > 23) r.y1 = 23;
    return r;
  endfunction

  initial begin
    int cyc;
    start = 0; grid_w = 40; id = 0; depth = 0; rect_new = '0; rect_old = '0; stall_pct = 30;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      stall_pct = (n % 4 == 0) ? 0 : 30;
      rect_new = rnd_rect();
      case (n % 5)
        0: rect_old = rect_new;
        1: rect_old = '0;
        default: begin
          rect_old = rect_new;
          rect_old.x0 = rect_new.x0 + 16'($urandom % 3) - 16'd1;
          rect_old.y0 = rect_new.y0 + 16'($urandom % 3) - 16'd1;
          rect_old.x1 = rect_new.x1 + 16'($urandom % 3) - 16'd1;
          rect_old.y1 = rect_new.y1 + 16'($urandom % 3) - 16'd1;
        end
      endcase
      if (n % 7 == 3) rect_old = rnd_rect();
      id = $urandom; depth = 31'($urandom);
      exp_q.delete();
      for (int y = int'(rect_new.y0); y < int'(rect_new.y1); y++)
        for (int x = int'(rect_new.x0); x < int'(rect_new.x1); x++)
          if (!(x >= int'(rect_old.x0) && x < int'(rect_old.x1) && y >= int'(rect_old.y0) && y < int'(rect_old.y1)))
            exp_q.push_back(y * 40 + x);
      start = 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 0;
      while (1) begin
        @(posedge clk);
        cyc++;
        if (o_valid && o_ready) begin
          checks++;
          if (exp_q.size() == 0 || int'(o_tile) != exp_q[0] || o_entry.id != id || o_entry.depth != depth
              || !o_entry.valid) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d exp %0d", o_tile, exp_q.size() ? exp_q[0] : -1);
          end
          if (exp_q.size()) void'(exp_q.pop_front());
        end
        if (done) break;
      end
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL %0d tiles missing", exp_q.size()); end
      // without stalls the unit scans one tile of the new rectangle per cycle
      if (stall_pct == 0) begin
        int area;
        area = int'(rect_new.x1 - rect_new.x0) * int'(rect_new.y1 - rect_new.y0);
        checks++;
        if (cyc != ((area == 0) ? 1 : area + 1)) begin failures++; $display("FAIL %0d cycles for area %0d", cyc, area); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
