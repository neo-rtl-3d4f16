// color_unit: view-dependent colour of one Gaussian from its spherical
// harmonics (SH) coefficients.
//
// d = normalize(mu - camera centre) (one square root and one division, done
// sequentially); per channel
//   colour = 0.5 + C0 sh0 - C1 d.y sh1 + C1 d.z sh2 - C1 d.x sh3,
//   C0 = 0.28209479, C1 = 0.48860251,
// clamped to [0, 1) and scaled to 8 bits. This is the degree-0 and degree-1
// part of the SH evaluation used by 3D Gaussian Splatting. Interface: pulse
// start with mu, campos and sh (Q4.12, order {sh0_r, sh0_g, sh0_b, sh1_r, ...,
// sh3_b}); done pulses 119 cycles after start with r, g, b (a 48-cycle
// square root, a 65-cycle division and a few control cycles).
// The paper states only that the unit computes colour from SH coefficients;
// the SH degree (1), the formats and the sequential datapath are this
// design's choices.
module color_unit
  import neo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic signed [31:0] mu     [3],
  input  logic signed [31:0] campos [3],
  input  logic signed [15:0] sh     [12],
  output logic        done,
  output logic        busy,
  output logic [7:0]  r,
  output logic [7:0]  g,
  output logic [7:0]  b
);
  localparam longint C0 = 18487;   // 0.28209479 in Q.16
  localparam longint C1 = 32021;   // 0.48860251 in Q.16

  typedef enum logic [2:0] {C_IDLE, C_LEN, C_SQ, C_DIV, C_EVAL} state_t;
  state_t state;

  logic signed [63:0] d [3];
  logic signed [15:0] shr [12];
  logic [63:0] len;
  logic        dv_start, dv_busy, dv_done, sq_start, sq_busy, sq_done;
  logic [63:0] dv_num, dv_den, dv_quo;
  logic [95:0] sq_x;
  logic [47:0] sq_root;

  seq_div  #(.W(64)) u_div (.clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
                            .busy(dv_busy), .done(dv_done), .quo(dv_quo));
  seq_sqrt #(.W(96)) u_sqrt (.clk, .rst_n, .start(sq_start), .x(sq_x),
                             .busy(sq_busy), .done(sq_done), .root(sq_root));

  function automatic logic [7:0] channel(input logic signed [15:0] s0, input logic signed [15:0] s1,
                                         input logic signed [15:0] s2, input logic signed [15:0] s3,
                                         input logic signed [63:0] x, input logic signed [63:0] y,
                                         input logic signed [63:0] z);
    logic signed [63:0] v;
    v = 64'sd32768 + ((64'(C0) * 64'(s0)) >>> 12)
      - ((((64'(C1) * 64'(s1)) >>> 12) * y) >>> 16)
      + ((((64'(C1) * 64'(s2)) >>> 12) * z) >>> 16)
      - ((((64'(C1) * 64'(s3)) >>> 12) * x) >>> 16);
    if (v < 0) v = 0;
    if (v > 64'sd65535) v = 64'sd65535;
    return 8'((v * 255) >>> 16);
  endfunction

  assign busy = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; done <= 1'b0; r <= '0; g <= '0; b <= '0; len <= '0;
      dv_start <= 1'b0; sq_start <= 1'b0; dv_num <= '0; dv_den <= '0; sq_x <= '0;
      for (int k = 0; k < 3; k++) d[k] <= '0;
      for (int k = 0; k < 12; k++) shr[k] <= '0;
    end else begin
      done <= 1'b0;
      dv_start <= 1'b0;
      sq_start <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          for (int k = 0; k < 3; k++) d[k] <= 64'(mu[k]) - 64'(campos[k]);
          for (int k = 0; k < 12; k++) shr[k] <= sh[k];
          state <= C_LEN;
        end
        C_LEN: begin
          sq_x <= 96'(d[0] * d[0]) + 96'(d[1] * d[1]) + 96'(d[2] * d[2]);   // Q.32
          sq_start <= 1'b1;
          state <= C_SQ;
        end
        C_SQ: if (sq_done) begin
          len <= 64'(sq_root);                                             // Q.16
          dv_num <= 64'(1) << 48; dv_den <= 64'(sq_root); dv_start <= 1'b1;
          state <= C_DIV;
        end
        C_DIV: if (dv_done) begin
          // normalise: d * (1/len), 1/len in Q.32
          for (int k = 0; k < 3; k++)
            d[k] <= (len == 0) ? 64'sd0 : 64'((128'(d[k]) * 128'(dv_quo)) >>> 32);
          state <= C_EVAL;
        end
        C_EVAL: begin
          r <= channel(shr[0], shr[3], shr[6], shr[9],  d[0], d[1], d[2]);
          g <= channel(shr[1], shr[4], shr[7], shr[10], d[0], d[1], d[2]);
          b <= channel(shr[2], shr[5], shr[8], shr[11], d[0], d[1], d[2]);
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
