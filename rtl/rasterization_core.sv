// rasterization_core: one Rasterization Core. It renders one TILE x TILE tile
// from the tile's sorted Gaussian table and, as a side effect, writes the
// table back with this frame's depths and valid bits for the next frame's sort.
//
// Flow per tile job:
//   clear the pixel buffer (one subtile per cycle);
//   for each batch of up to NB table entries:
//     load the entries, then the 2D features of each entry's Gaussian from the
//     feature table into the 2D Gaussian feature buffer;
//     run the subtile groups: group g holds subtiles 4g..4g+3. The NITU
//     Intersection Test Units test one Gaussian per cycle against the four
//     subtiles of a group and write 4-bit bitmap rows into one bank of the
//     bitmap buffer while the NSCU Subtile Compute Units blend the previous
//     group from the other bank (ITU/SCU pipelining). Each SCU walks the batch
//     in depth order; a Gaussian whose bitmap bit is 0 costs one cycle, one
//     that hits costs SUBTILE*SUBTILE/LANES cycles;
//     write the entries back with valid = cumulative OR of all subtile hits
//     and depth = the depth in the feature buffer (deferred depth update);
//   write the finished pixels to the frame buffer, one word per pixel
//   {15'b0, T(17), 8'b0, R, G, B} at fb_base + y*screen_w + x; pixels outside
//   the screen are skipped.
// One memory master port; tile done pulses done.
// From the paper: 4 ITU + 4 SCU per core, subtile groups of four, pipelined
// ITU/SCU, bitmap, feature and pixel buffers, deferred depth and valid update.
// This design's choices: the batch size NB, the memory layout, pixel-serial
// loading of features, and LANES pixels per SCU cycle.
module rasterization_core
  import neo_pkg::*;
#(
  parameter int TILE    = 64,
  parameter int SUBTILE = 8,
  parameter int NITU    = 4,
  parameter int NSCU    = 4,
  parameter int LANES   = 16,
  parameter int NB      = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [MEM_AW-1:0] feat_base,
  input  logic [MEM_AW-1:0] fb_base,
  input  logic [15:0] screen_w,
  input  logic [15:0] screen_h,
  input  logic        job_valid,
  input  rast_job_t   job,
  output logic        job_ready,
  output logic        done,
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        rsp_valid,
  input  logic [MEM_DW-1:0] rsp_data
);
  localparam int SPT    = TILE / SUBTILE;        // subtiles per tile row
  localparam int NSUBT  = SPT * SPT;             // subtiles per tile
  localparam int PPS    = SUBTILE * SUBTILE;     // pixels per subtile
  localparam int STEPS  = PPS / LANES;
  localparam int NGRP   = NSUBT / NSCU;
  localparam int BW     = $clog2(NB);
  localparam int SW     = $clog2(NSUBT);
  localparam int PW     = $clog2(PPS);

  typedef enum logic [3:0] {
    R_IDLE, R_CLEAR, R_BATCH, R_LDT, R_LDF, R_RUN, R_WB, R_OUT, R_DONE
  } state_t;
  state_t state;

  rast_job_t j;
  pix_t      pbuf [NSUBT][PPS];            // pixel buffer
  feat2d_t   fbuf [NB];                    // 2D Gaussian feature buffer
  entry_t    ebuf [NB];                    // table entries of the batch
  logic [NSCU-1:0] bm [2][NB];             // bitmap buffer, two banks
  logic      vacc [NB];                    // cumulative OR per Gaussian

  logic [15:0] b0, bn, cnt, iss, rcv;
  logic [1:0]  w_iss, w_rcv;
  logic [63:0] w0, w1, w2;
  logic [15:0] tile_px, tile_py;
  assign tile_px = 16'(j.tile_x * TILE);
  assign tile_py = 16'(j.tile_y * TILE);

  // ------------------------------------------------------------ group pipeline
  logic [5:0]  stage;                      // ITU on group stage, SCU on stage-1
  logic [15:0] itu_i;
  logic [15:0] sc_i    [NSCU];
  logic [7:0]  sc_step [NSCU];
  logic        itu_fin, scu_fin;

  // ITUs
  logic [NITU-1:0] itu_hit;
  logic            itu_acc [NITU+1];
  assign itu_acc[0] = vacc[itu_i[BW-1:0]];
  for (genvar k = 0; k < NITU; k++) begin : g_itu
    logic [SW-1:0] s;
    assign s = SW'(int'(stage) * NITU + k);
    intersection_test_unit #(.SUBTILE(SUBTILE)) u_itu (
      .feat(fbuf[itu_i[BW-1:0]]),
      .sub_x(tile_px + 16'(int'(s) % SPT * SUBTILE)),
      .sub_y(tile_py + 16'(int'(s) / SPT * SUBTILE)),
      .acc_in(itu_acc[k]), .hit(itu_hit[k]), .acc_out(itu_acc[k+1]));
  end
  assign itu_fin = (int'(stage) >= NGRP) || (itu_i >= bn);

  // SCUs
  pix_t        sc_pin  [NSCU][LANES];
  pix_t        sc_pout [NSCU][LANES];
  logic [15:0] sc_px   [NSCU][LANES];
  logic [15:0] sc_py   [NSCU][LANES];
  logic [NSCU-1:0] sc_fin, sc_hit;
  logic [SW-1:0]   sc_s [NSCU];
  for (genvar k = 0; k < NSCU; k++) begin : g_scu
    assign sc_s[k]   = SW'((int'(stage) - 1) * NSCU + k);
    assign sc_fin[k] = (stage == 0) || (sc_i[k] >= bn);
    assign sc_hit[k] = !sc_fin[k] && bm[~stage[0]][sc_i[k][BW-1:0]][k];
    for (genvar l = 0; l < LANES; l++) begin : g_l
      logic [PW-1:0] p;
      assign p = PW'(int'(sc_step[k]) * LANES + l);
      assign sc_pin[k][l] = pbuf[sc_s[k]][p];
      assign sc_px[k][l]  = tile_px + 16'(int'(sc_s[k]) % SPT * SUBTILE + int'(p) % SUBTILE);
      assign sc_py[k][l]  = tile_py + 16'(int'(sc_s[k]) / SPT * SUBTILE + int'(p) / SUBTILE);
    end
    subtile_compute_unit #(.LANES(LANES)) u_scu (
      .feat(fbuf[sc_i[k][BW-1:0]]), .px(sc_px[k]), .py(sc_py[k]),
      .pin(sc_pin[k]), .pout(sc_pout[k]));
  end
  assign scu_fin = &sc_fin;

  // ------------------------------------------------------------ memory port
  logic [15:0] ogx, ogy;
  logic [SW-1:0] o_s;
  logic [PW-1:0] o_p;
  logic          o_in;
  pix_t          o_pix;
  assign ogx  = tile_px + 16'(cnt % 16'(TILE));
  assign ogy  = tile_py + 16'(cnt / 16'(TILE));
  assign o_s  = SW'((int'(cnt) / TILE / SUBTILE) * SPT + (int'(cnt) % TILE) / SUBTILE);
  assign o_p  = PW'(((int'(cnt) / TILE) % SUBTILE) * SUBTILE + (int'(cnt) % TILE) % SUBTILE);
  assign o_in = (ogx < screen_w) && (ogy < screen_h);
  assign o_pix = pbuf[o_s][o_p];


  always_comb begin
    req_valid = 1'b0;
    req       = '0;
    case (state)
      R_LDT: begin
        req_valid = (iss < bn);
        req.addr  = j.tbl_base + MEM_AW'(b0) + MEM_AW'(iss);
      end
      R_LDF: begin
        req_valid = (iss < bn);
        req.addr  = feat_base + MEM_AW'(ebuf[iss[BW-1:0]].id) * MEM_AW'(FEAT_WORDS) + MEM_AW'(w_iss);
      end
      R_WB: begin
        req_valid = 1'b1;
        req.we    = 1'b1;
        req.addr  = j.tbl_base + MEM_AW'(b0) + MEM_AW'(cnt);
        req.wdata = {vacc[cnt[BW-1:0]], fbuf[cnt[BW-1:0]].depth, ebuf[cnt[BW-1:0]].id};
      end
      R_OUT: begin
        req_valid = o_in;
        req.we    = 1'b1;
        req.addr  = fb_base + MEM_AW'(ogy) * MEM_AW'(screen_w) + MEM_AW'(ogx);
        req.wdata = {15'b0, o_pix.t, 8'b0, o_pix.r[23:16], o_pix.g[23:16], o_pix.b[23:16]};
      end
      default: ;
    endcase
  end

  assign job_ready = (state == R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE; done <= 1'b0; j <= '0; b0 <= '0; bn <= '0; cnt <= '0;
      iss <= '0; rcv <= '0; w_iss <= '0; w_rcv <= '0; w0 <= '0; w1 <= '0; w2 <= '0;
      stage <= '0; itu_i <= '0;
      for (int k = 0; k < NSCU; k++) begin sc_i[k] <= '0; sc_step[k] <= '0; end
    end else begin
      done <= 1'b0;
      case (state)
        R_IDLE: if (job_valid) begin
          j <= job; cnt <= '0; b0 <= '0;
          state <= R_CLEAR;
        end
        R_CLEAR: begin
          for (int p = 0; p < PPS; p++) pbuf[cnt[SW-1:0]][p] <= PIX_INIT;
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NSUBT - 1)) state <= R_BATCH;
        end
        R_BATCH: begin
          iss <= '0; rcv <= '0; cnt <= '0;
          if (b0 < j.tbl_len) begin
            bn    <= ((j.tbl_len - b0) > 16'(NB)) ? 16'(NB) : (j.tbl_len - b0);
            state <= R_LDT;
          end else begin
            state <= R_OUT;
          end
        end
        R_LDT: begin
          if (req_valid && req_ready) iss <= iss + 1'b1;
          if (rsp_valid) begin
            ebuf[rcv[BW-1:0]] <= entry_t'(rsp_data);
            vacc[rcv[BW-1:0]] <= 1'b0;
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == bn) begin
              iss <= '0; rcv <= '0; w_iss <= '0; w_rcv <= '0;
              state <= R_LDF;
            end
          end
        end
        R_LDF: begin
          if (req_valid && req_ready) begin
            w_iss <= w_iss + 1'b1;
            if (w_iss == 2'd3) iss <= iss + 1'b1;
          end
          if (rsp_valid) begin
            w_rcv <= w_rcv + 1'b1;
            case (w_rcv)
              2'd0: w0 <= rsp_data;
              2'd1: w1 <= rsp_data;
              2'd2: w2 <= rsp_data;
              default: begin
                fbuf[rcv[BW-1:0]] <= '{mx: w0[63:32], my: w0[31:0], ca: w1[63:32],
                                       cb: w1[31:0], cc: w2[63:32], opacity: w2[31:16],
                                       radius: w2[15:0], depth: rsp_data[62:32],
                                       r: rsp_data[31:24], g: rsp_data[23:16],
                                       b: rsp_data[15:8]};
                rcv <= rcv + 1'b1;
                if (rcv + 1'b1 == bn) begin
                  stage <= '0; itu_i <= '0;
                  for (int k = 0; k < NSCU; k++) begin sc_i[k] <= '0; sc_step[k] <= '0; end
                  state <= R_RUN;
                end
              end
            endcase
          end
        end
        R_RUN: begin
          // ITU stage: one Gaussian per cycle against NITU subtiles
          if (!itu_fin) begin
            bm[stage[0]][itu_i[BW-1:0]] <= itu_hit;
            vacc[itu_i[BW-1:0]] <= itu_acc[NITU];
            itu_i <= itu_i + 1'b1;
          end
          // SCU stage
          for (int k = 0; k < NSCU; k++) begin
            if (!sc_fin[k]) begin
              if (sc_hit[k]) begin
                for (int l = 0; l < LANES; l++)
                  pbuf[sc_s[k]][PW'(int'(sc_step[k]) * LANES + l)] <= sc_pout[k][l];
                if (sc_step[k] == 8'(STEPS - 1)) begin
                  sc_step[k] <= '0;
                  sc_i[k]    <= sc_i[k] + 1'b1;
                end else begin
                  sc_step[k] <= sc_step[k] + 1'b1;
                end
              end else begin
                sc_i[k] <= sc_i[k] + 1'b1;
              end
            end
          end
          if (itu_fin && scu_fin) begin
            if (int'(stage) == NGRP) begin
              cnt   <= '0;
              state <= R_WB;
            end else begin
              stage <= stage + 1'b1;
              itu_i <= '0;
              for (int k = 0; k < NSCU; k++) begin sc_i[k] <= '0; sc_step[k] <= '0; end
            end
          end
        end
        R_WB: begin
          if (req_ready) begin
            cnt <= cnt + 1'b1;
            if (cnt + 1'b1 == bn) begin
              b0    <= b0 + bn;
              state <= R_BATCH;
            end
          end
        end
        R_OUT: begin
          if (req_ready || !o_in) begin
            cnt <= cnt + 1'b1;
            if (cnt == 16'(TILE * TILE - 1)) state <= R_DONE;
          end
        end
        R_DONE: begin
          done  <= 1'b1;
          state <= R_IDLE;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  // the SCUs of a group may only start once that group's bitmaps exist
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == R_RUN) && !scu_fin |-> stage != 0);
endmodule
