// msu_plus (Merge Sorting Unit+): merges two sorted streams of Gaussian table
// entries into one sorted stream and, when filter_en is set, drops every entry
// whose valid bit is clear.
//
// Structure (as drawn in the paper's MSU+ figure): two local input buffers, an
// invalid-bit filter behind each, one depth comparator, a 2:1 selection mux,
// a local output buffer and an index counter. The same unit serves three
// purposes: merging sorted sub-chunks inside a chunk (filter off), and
// merging the reused table of a tile with its sorted incoming table while
// deleting outgoing Gaussians (filter on), so insertion and deletion happen in
// one pass with no shifting of entries.
//
// Protocol: pulse start with len_a/len_b (entries to expect on each input).
// Inputs and output are valid/ready streams. One entry leaves per cycle at
// best. done pulses for one cycle after the last entry has left the output
// buffer; out_count (the index counter) then holds the number written.
// On equal depths the entry of input A goes first. Buffer depths of 2 are
// this design's choice.
module msu_plus
  import neo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] len_a,
  input  logic [15:0] len_b,
  input  logic        filter_en,
  input  logic        a_valid,
  input  entry_t      a_data,
  output logic        a_ready,
  input  logic        b_valid,
  input  entry_t      b_data,
  output logic        b_ready,
  output logic        o_valid,
  output entry_t      o_data,
  input  logic        o_ready,
  output logic        busy,
  output logic        done,
  output logic [15:0] out_count
);
  logic [15:0] acc_a, acc_b, la, lb;
  logic        filt;
  entry_t      ha, hb;
  logic        fa_full, fa_empty, fb_full, fb_empty, fo_full, fo_empty;
  logic        pop_a, pop_b, push_o;
  entry_t      sel;

  assign a_ready = busy && !fa_full && (acc_a != la);
  assign b_ready = busy && !fb_full && (acc_b != lb);

  sync_fifo #(.W($bits(entry_t)), .DEPTH(2)) u_in_a (
    .clk, .rst_n, .push(a_valid && a_ready), .wr_data(a_data), .pop(pop_a),
    .rd_data(ha), .full(fa_full), .empty(fa_empty));
  sync_fifo #(.W($bits(entry_t)), .DEPTH(2)) u_in_b (
    .clk, .rst_n, .push(b_valid && b_ready), .wr_data(b_data), .pop(pop_b),
    .rd_data(hb), .full(fb_full), .empty(fb_empty));

  // invalid-bit filters
  logic drop_a, drop_b, ok_a, ok_b, exh_a, exh_b;
  assign drop_a = busy && !fa_empty && filt && !ha.valid;
  assign drop_b = busy && !fb_empty && filt && !hb.valid;
  assign ok_a   = busy && !fa_empty && !drop_a;
  assign ok_b   = busy && !fb_empty && !drop_b;
  assign exh_a  = (acc_a == la) && fa_empty;
  assign exh_b  = (acc_b == lb) && fb_empty;

  // comparator and selection mux
  logic take_a, take_b;
  always_comb begin
    take_a = 1'b0;
    take_b = 1'b0;
    if (!fo_full) begin
      if (ok_a && ok_b) begin
        if (hb.depth < ha.depth) take_b = 1'b1;
        else                     take_a = 1'b1;
      end else if (ok_a && exh_b) begin
        take_a = 1'b1;
      end else if (ok_b && exh_a) begin
        take_b = 1'b1;
      end
    end
  end
  assign sel    = take_b ? hb : ha;
  assign push_o = take_a || take_b;
  assign pop_a  = take_a || drop_a;
  assign pop_b  = take_b || drop_b;

  sync_fifo #(.W($bits(entry_t)), .DEPTH(2)) u_out (
    .clk, .rst_n, .push(push_o), .wr_data(sel), .pop(o_valid && o_ready),
    .rd_data(o_data), .full(fo_full), .empty(fo_empty));
  assign o_valid = !fo_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; acc_a <= '0; acc_b <= '0;
      la <= '0; lb <= '0; filt <= 1'b0; out_count <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; la <= len_a; lb <= len_b; filt <= filter_en;
        acc_a <= '0; acc_b <= '0; out_count <= '0;
      end else if (busy) begin
        if (a_valid && a_ready) acc_a <= acc_a + 1'b1;
        if (b_valid && b_ready) acc_b <= acc_b + 1'b1;
        if (push_o) out_count <= out_count + 1'b1;
        if (exh_a && exh_b && fo_empty) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // merges of fully sorted runs (filter off: chunk and incoming-table merges)
  // must come out in depth order; the final merge may not be, because Dynamic
  // Partial Sorting leaves the reused table only approximately sorted
  entry_t last_out;
  logic   have_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) have_last <= 1'b0;
    else if (start && !busy) have_last <= 1'b0;
    else if (push_o) begin
      have_last <= 1'b1;
      last_out  <= sel;
    end
  end
  assert property (@(posedge clk) disable iff (!rst_n)
                   push_o && have_last && !filt |-> sel.depth >= last_out.depth);
endmodule
