// seq_sqrt: integer square root, one result bit per cycle (digit-by-digit
// method). Pulse start with x; done pulses W/2+1 cycles later with
// root = floor(sqrt(x)). W must be even. Helper of the projection and colour
// units.
module seq_sqrt #(
  parameter int W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   rad;
  localparam int RW = W / 2 + 4;
  logic [RW-1:0]  rem;
  logic [W/2-1:0] r;
  logic [$clog2(W/2+1)-1:0] n;
  logic [RW-1:0]  cur, trial;
  assign cur   = {rem[RW-3:0], rad[W-1:W-2]};
  assign trial = cur - RW'({r, 2'b01});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rad <= '0; rem <= '0; r <= '0; n <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; rad <= x; rem <= '0; r <= '0; n <= '0;
      end else if (busy) begin
        rad <= rad << 2;
        if (!trial[RW-1]) begin
          rem <= trial;
          r   <= {r[W/2-2:0], 1'b1};
        end else begin
          rem <= cur;
          r   <= {r[W/2-2:0], 1'b0};
        end
        n <= n + 1'b1;
        if (n == ($clog2(W/2+1))'(W/2 - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= !trial[RW-1] ? {r[W/2-2:0], 1'b1} : {r[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
