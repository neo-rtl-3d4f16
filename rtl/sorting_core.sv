// sorting_core: one Sorting Core of the Sorting Engine. It runs the
// reuse-and-update sort of one tile:
//   1. Reordering: Dynamic Partial Sorting of the tile's table from the
//      previous frame, in place, chunk by chunk (ranges from dps_range_gen).
//   2. Sorting of the tile's incoming table from scratch: each chunk of up to
//      CHUNK entries is sorted in the buffers and written back, then the
//      sorted chunks are merged pairwise in memory (ping-pong between inc_base
//      and scr_base) until one run remains.
//   3. Insertion and deletion: the MSU+ merges the reordered table (stream A)
//      with the sorted incoming table (stream B) into out_base and drops
//      entries whose valid bit is clear. res.out_len is the new table length.
//
// Sorting a chunk in the buffers: the chunk is loaded into input bank 0 and
// padded to a power of two P >= 16; the BSU sorts its 16-entry sub-chunks one
// per cycle in place; then MSU+ passes merge runs of 16, 32, ... between
// bank 0 and output bank 2 until one run of P entries remains; the first n
// entries are written back. Merges that read from memory stream A through
// bank 0 and B through bank 1, reloading a bank when it runs dry, and write
// the merged output straight to memory.
//
// Interface: job_valid/job_ready takes a sort_job_t; done pulses with res.
// One memory master port (neo_pkg protocol).
// From the paper: 256-entry chunks, 16-entry sub-chunks, BSU + MSU+ and the
// chunk and merge steps. This design's choices: the bank assignment, and that
// memory transfers are not overlapped with sorting (the paper's double
// buffering hides that latency; here a bank is filled before it is used).
module sorting_core
  import neo_pkg::*;
#(
  parameter int CHUNK = 256,
  parameter int SUB   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        job_valid,
  input  sort_job_t   job,
  output logic        job_ready,
  output logic        done,
  output sort_res_t   res,
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data
);
  localparam int NB = 3;           // bank 0/1: input buffer, bank 2: output buffer

  typedef enum logic [4:0] {
    S_IDLE, S_DPS_START, S_DPS_WAIT, S_LOAD, S_BSU, S_BSU_DRAIN, S_MPASS_START,
    S_MPASS_RUN, S_MPASS_NEXT, S_STORE, S_INC_NEXT, S_GM, S_FINAL,
    S_MM_START, S_MM_RUN, S_MM_LDA, S_MM_LDB, S_FIN
  } state_t;

  state_t state, ld_ret, st_ret, mm_ret;
  sort_job_t j;
  entry_t bufm [NB][CHUNK];

  // chunk being sorted
  logic [MEM_AW-1:0] c_base;
  logic [15:0] c_n, c_p;
  // generic load / store
  logic [1:0]  ld_bank, st_bank;
  logic [MEM_AW-1:0] ld_base, st_base;
  logic [15:0] ld_n, ld_iss, ld_rcv, st_n, st_cnt;
  // in-buffer merge passes
  logic [15:0] mp_run, mp_pos;
  logic [1:0]  mp_src, mp_dst;
  logic [15:0] a_ptr, b_ptr, o_ptr;
  // BSU feed
  logic [15:0] bsu_s, bsu_s_d;
  // memory merge
  logic [MEM_AW-1:0] mm_a_base, mm_b_base, mm_dst;
  logic [15:0] mm_a_len, mm_b_len, a_fet, b_fet, a_n, b_n;
  logic        mm_filter;
  // incoming sort / global merge
  logic [15:0] inc_off;
  logic [16:0] gm_run, gm_pos;
  logic [MEM_AW-1:0] gm_src, gm_dst;
  logic        dps_done_f, msu_done_f;

  // ---------------------------------------------------------------- DPS ranges
  logic        dps_start, rng_valid, rng_ready, dps_done;
  logic [15:0] rng_start, rng_end;
  dps_range_gen #(.CHUNK(CHUNK)) u_dps (
    .clk, .rst_n, .start(dps_start), .len(j.tbl_len), .frame(j.frame),
    .rng_valid, .rng_start, .rng_end, .rng_ready, .done(dps_done));
  assign dps_start = (state == S_DPS_START);
  assign rng_ready = (state == S_DPS_WAIT) && rng_valid;

  // ---------------------------------------------------------------- BSU
  logic   bsu_in_valid, bsu_out_valid;
  entry_t bsu_in [SUB];
  entry_t bsu_out [SUB];
  assign bsu_in_valid = (state == S_BSU);
  always_comb begin
    for (int k = 0; k < SUB; k++) begin
      int idx;
      idx = int'(bsu_s) * SUB + k;
      bsu_in[k] = (idx < int'(c_n)) ? bufm[0][idx[$clog2(CHUNK)-1:0]] : PAD_ENTRY;
    end
  end
  bitonic_sort_unit #(.N(SUB)) u_bsu (
    .clk, .rst_n, .in_valid(bsu_in_valid), .in_data(bsu_in),
    .out_valid(bsu_out_valid), .out_data(bsu_out));

  // ---------------------------------------------------------------- MSU+
  logic        msu_start, msu_filter, msu_busy, msu_done;
  logic [15:0] msu_la, msu_lb, msu_cnt;
  logic        a_valid, a_ready, b_valid, b_ready, o_valid, o_ready;
  entry_t      a_data, b_data, o_data;
  logic        in_buf_mode;

  assign in_buf_mode = (state == S_MPASS_START) || (state == S_MPASS_RUN);
  assign msu_start   = (state == S_MPASS_START) || (state == S_MM_START);
  assign msu_la      = in_buf_mode ? mp_run : mm_a_len;
  assign msu_lb      = in_buf_mode ? mp_run : mm_b_len;
  assign msu_filter  = in_buf_mode ? 1'b0 : mm_filter;

  logic [15:0] a_idx, b_idx;
  assign a_idx = in_buf_mode ? mp_pos + a_ptr : a_ptr;
  assign b_idx = in_buf_mode ? mp_pos + mp_run + b_ptr : b_ptr;
  assign a_data  = bufm[in_buf_mode ? mp_src : 2'd0][a_idx[$clog2(CHUNK)-1:0]];
  assign b_data  = bufm[in_buf_mode ? mp_src : 2'd1][b_idx[$clog2(CHUNK)-1:0]];
  assign a_valid = (state == S_MPASS_RUN) || ((state == S_MM_RUN) && (a_ptr < a_n));
  assign b_valid = (state == S_MPASS_RUN) || ((state == S_MM_RUN) && (b_ptr < b_n));
  assign o_ready = (state == S_MPASS_RUN) || ((state == S_MM_RUN) && req_ready);

  msu_plus u_msu (
    .clk, .rst_n, .start(msu_start), .len_a(msu_la), .len_b(msu_lb),
    .filter_en(msu_filter), .a_valid, .a_data, .a_ready, .b_valid, .b_data,
    .b_ready, .o_valid, .o_data, .o_ready, .busy(msu_busy), .done(msu_done),
    .out_count(msu_cnt));

  // ---------------------------------------------------------------- memory port
  always_comb begin
    req_valid = 1'b0;
    req       = '0;
    case (state)
      S_LOAD, S_MM_LDA, S_MM_LDB: begin
        req_valid = (ld_iss < ld_n);
        req.we    = 1'b0;
        req.addr  = ld_base + MEM_AW'(ld_iss);
      end
      S_STORE: begin
        req_valid = (st_cnt < st_n);
        req.we    = 1'b1;
        req.addr  = st_base + MEM_AW'(st_cnt);
        req.wdata = bufm[st_bank][st_cnt[$clog2(CHUNK)-1:0]];
      end
      S_MM_RUN: begin
        req_valid = o_valid;
        req.we    = 1'b1;
        req.addr  = mm_dst + MEM_AW'(o_ptr);
        req.wdata = o_data;
      end
      default: ;
    endcase
  end

  assign job_ready = (state == S_IDLE);

  function automatic logic [15:0] pow2_pad(input logic [15:0] n);
    logic [15:0] p;
    p = 16'(SUB);
    while (p < n && p < 16'(CHUNK)) p = p << 1;
    return p;
  endfunction

  function automatic logic [15:0] min16(input logic [16:0] a, input logic [16:0] b);
    return (a < b) ? a[15:0] : b[15:0];
  endfunction

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; res <= '0; j <= '0;
      ld_ret <= S_IDLE; st_ret <= S_IDLE; mm_ret <= S_IDLE;
      c_base <= '0; c_n <= '0; c_p <= '0;
      ld_bank <= '0; st_bank <= '0; ld_base <= '0; st_base <= '0;
      ld_n <= '0; ld_iss <= '0; ld_rcv <= '0; st_n <= '0; st_cnt <= '0;
      mp_run <= '0; mp_pos <= '0; mp_src <= '0; mp_dst <= '0;
      a_ptr <= '0; b_ptr <= '0; o_ptr <= '0; bsu_s <= '0; bsu_s_d <= '0;
      mm_a_base <= '0; mm_b_base <= '0; mm_dst <= '0; mm_a_len <= '0; mm_b_len <= '0;
      a_fet <= '0; b_fet <= '0; a_n <= '0; b_n <= '0; mm_filter <= 1'b0;
      inc_off <= '0; gm_run <= '0; gm_pos <= '0; gm_src <= '0; gm_dst <= '0;
      dps_done_f <= 1'b0; msu_done_f <= 1'b0;
    end else begin
      done <= 1'b0;
      if (dps_done) dps_done_f <= 1'b1;
      if (msu_done) msu_done_f <= 1'b1;

      case (state)
        S_IDLE: if (job_valid) begin
          j <= job;
          dps_done_f <= 1'b0;
          state <= S_DPS_START;
        end

        // ---- 1. reordering
        S_DPS_START: state <= S_DPS_WAIT;
        S_DPS_WAIT: begin
          if (rng_valid) begin
            c_base  <= j.tbl_base + MEM_AW'(rng_start);
            c_n     <= rng_end - rng_start;
            c_p     <= pow2_pad(rng_end - rng_start);
            ld_bank <= 2'd0; ld_base <= j.tbl_base + MEM_AW'(rng_start);
            ld_n    <= rng_end - rng_start; ld_iss <= '0; ld_rcv <= '0;
            ld_ret  <= S_BSU; st_ret <= S_DPS_WAIT; bsu_s <= '0;
            state   <= S_LOAD;
          end else if (dps_done_f || dps_done) begin
            inc_off <= '0;
            state   <= S_INC_NEXT;
          end
        end

        // ---- generic chunk load into a bank
        S_LOAD, S_MM_LDA, S_MM_LDB: begin
          if (req_valid && req_ready) ld_iss <= ld_iss + 1'b1;
          if (rsp_valid) begin
            bufm[ld_bank][ld_rcv[$clog2(CHUNK)-1:0]] <= entry_t'(rsp_data);
            ld_rcv <= ld_rcv + 1'b1;
          end
          if ((ld_rcv == ld_n) || (rsp_valid && (ld_rcv + 1'b1 == ld_n))) state <= ld_ret;
        end

        // ---- BSU over all sub-chunks of the padded chunk
        S_BSU: begin
          bsu_s_d <= bsu_s;
          if ((bsu_s + 1'b1) * 16'(SUB) >= c_p) state <= S_BSU_DRAIN;
          bsu_s <= bsu_s + 1'b1;
        end
        S_BSU_DRAIN: begin
          if (16'(SUB) >= c_p) begin
            // one sub-chunk only: already sorted
            st_bank <= 2'd0; st_base <= c_base; st_n <= c_n; st_cnt <= '0;
            state <= S_STORE;
          end else begin
            mp_run <= 16'(SUB); mp_pos <= '0; mp_src <= 2'd0; mp_dst <= 2'd2;
            state <= S_MPASS_START;
          end
        end

        // ---- in-buffer merge passes
        S_MPASS_START: begin
          a_ptr <= '0; b_ptr <= '0; o_ptr <= '0; msu_done_f <= 1'b0;
          state <= S_MPASS_RUN;
        end
        S_MPASS_RUN: begin
          if (a_valid && a_ready) a_ptr <= a_ptr + 1'b1;
          if (b_valid && b_ready) b_ptr <= b_ptr + 1'b1;
          if (o_valid && o_ready) begin
            bufm[mp_dst][$clog2(CHUNK)'(mp_pos + o_ptr)] <= o_data;
            o_ptr <= o_ptr + 1'b1;
          end
          if (msu_done) state <= S_MPASS_NEXT;
        end
        S_MPASS_NEXT: begin
          if (mp_pos + (mp_run << 1) < c_p) begin
            mp_pos <= mp_pos + (mp_run << 1);
            state  <= S_MPASS_START;
          end else if ((mp_run << 2) <= c_p) begin
            mp_pos <= '0; mp_run <= mp_run << 1;
            mp_src <= mp_dst; mp_dst <= mp_src;
            state  <= S_MPASS_START;
          end else begin
            st_bank <= mp_dst; st_base <= c_base; st_n <= c_n; st_cnt <= '0;
            state <= S_STORE;
          end
        end

        // ---- generic store of a bank
        S_STORE: begin
          if (req_valid && req_ready) begin
            st_cnt <= st_cnt + 1'b1;
            if (st_cnt + 1'b1 == st_n) state <= st_ret;
          end
          if (st_n == 0) state <= st_ret;
        end

        // ---- 2. incoming table: chunk sort, then global merge
        S_INC_NEXT: begin
          if (inc_off < j.inc_len) begin
            c_base  <= j.inc_base + MEM_AW'(inc_off);
            c_n     <= min16(17'(j.inc_len - inc_off), 17'(CHUNK));
            c_p     <= pow2_pad(min16(17'(j.inc_len - inc_off), 17'(CHUNK)));
            ld_bank <= 2'd0; ld_base <= j.inc_base + MEM_AW'(inc_off);
            ld_n    <= min16(17'(j.inc_len - inc_off), 17'(CHUNK));
            ld_iss  <= '0; ld_rcv <= '0; ld_ret <= S_BSU; st_ret <= S_INC_NEXT;
            bsu_s   <= '0;
            inc_off <= inc_off + 16'(CHUNK);
            state   <= S_LOAD;
          end else begin
            gm_run <= 17'(CHUNK); gm_pos <= '0;
            gm_src <= j.inc_base; gm_dst <= j.scr_base;
            state  <= S_GM;
          end
        end
        S_GM: begin
          if (gm_run >= 17'(j.inc_len)) begin
            state <= S_FINAL;
          end else if (gm_pos < 17'(j.inc_len)) begin
            mm_a_base <= gm_src + MEM_AW'(gm_pos);
            mm_a_len  <= min16(gm_run, 17'(j.inc_len) - gm_pos);
            mm_b_base <= gm_src + MEM_AW'(gm_pos + gm_run);
            mm_b_len  <= (gm_pos + gm_run >= 17'(j.inc_len)) ? 16'd0
                         : min16(gm_run, 17'(j.inc_len) - gm_pos - gm_run);
            mm_dst    <= gm_dst + MEM_AW'(gm_pos);
            mm_filter <= 1'b0;
            mm_ret    <= S_GM;
            gm_pos    <= gm_pos + (gm_run << 1);
            state     <= S_MM_START;
          end else begin
            gm_src <= gm_dst; gm_dst <= gm_src;
            gm_run <= gm_run << 1; gm_pos <= '0;
          end
        end

        // ---- 3. merge reordered table with sorted incoming, drop invalid
        S_FINAL: begin
          mm_a_base <= j.tbl_base; mm_a_len <= j.tbl_len;
          mm_b_base <= gm_src;     mm_b_len <= j.inc_len;
          mm_dst    <= j.out_base; mm_filter <= 1'b1;
          mm_ret    <= S_FIN;
          state     <= S_MM_START;
        end

        // ---- merge of two streams read from memory
        S_MM_START: begin
          a_ptr <= '0; b_ptr <= '0; o_ptr <= '0; a_n <= '0; b_n <= '0;
          a_fet <= '0; b_fet <= '0; msu_done_f <= 1'b0;
          state <= S_MM_RUN;
        end
        S_MM_RUN: begin
          if (a_valid && a_ready) a_ptr <= a_ptr + 1'b1;
          if (b_valid && b_ready) b_ptr <= b_ptr + 1'b1;
          if (o_valid && o_ready) o_ptr <= o_ptr + 1'b1;
          if (msu_done || msu_done_f) begin
            state <= mm_ret;
          end else if ((a_ptr == a_n) && !(a_valid && a_ready) && (a_fet < mm_a_len)) begin
            ld_bank <= 2'd0; ld_base <= mm_a_base + MEM_AW'(a_fet);
            ld_n    <= min16(17'(mm_a_len - a_fet), 17'(CHUNK));
            a_n     <= min16(17'(mm_a_len - a_fet), 17'(CHUNK));
            a_fet   <= a_fet + min16(17'(mm_a_len - a_fet), 17'(CHUNK));
            a_ptr   <= '0;
            ld_iss  <= '0; ld_rcv <= '0; ld_ret <= S_MM_RUN;
            state   <= S_MM_LDA;
          end else if ((b_ptr == b_n) && !(b_valid && b_ready) && (b_fet < mm_b_len)) begin
            ld_bank <= 2'd1; ld_base <= mm_b_base + MEM_AW'(b_fet);
            ld_n    <= min16(17'(mm_b_len - b_fet), 17'(CHUNK));
            b_n     <= min16(17'(mm_b_len - b_fet), 17'(CHUNK));
            b_fet   <= b_fet + min16(17'(mm_b_len - b_fet), 17'(CHUNK));
            b_ptr   <= '0;
            ld_iss  <= '0; ld_rcv <= '0; ld_ret <= S_MM_RUN;
            state   <= S_MM_LDB;
          end
        end

        S_FIN: begin
          res.tile    <= j.tile;
          res.out_len <= o_ptr;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase

      if (bsu_out_valid) begin
        for (int k = 0; k < SUB; k++)
          bufm[0][(int'(bsu_s_d) * SUB + k) % CHUNK] <= bsu_out[k];
      end
    end
  end

  // a merge must not leave entries in the MSU+ when the core returns
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_FIN) |-> !msu_busy);
endmodule
