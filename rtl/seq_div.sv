// seq_div: unsigned restoring divider, one quotient bit per cycle. Pulse start
// with num/den; done pulses W+1 cycles later with quo = num / den (all ones
// if den is 0). Shared helper of the projection and colour units.
module seq_div #(
  parameter int W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo
);
  logic [W-1:0] rem, d, q;
  logic [$clog2(W+1)-1:0] n;
  logic [W:0] trial;
  assign trial = {rem, q[W-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rem <= '0; d <= '0; q <= '0; n <= '0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; rem <= '0; d <= den; q <= num; n <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], q[W-1]};
          q   <= {q[W-2:0], 1'b0};
        end
        n <= n + 1'b1;
        if (n == ($clog2(W+1))'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (d == '0) ? '1 : (!trial[W] ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0});
        end
      end
    end
  end
endmodule
