// Testbench of the memory arbiter: three masters issue random reads and
// writes to their own address ranges through the arbiter into a DRAM model
// with latency and random back-pressure. Every read response must reach the
// master that issued it, in order, with the data last written there; under
// full load the round-robin grant must share the port evenly, and the
// outstanding-read limit must be reached (reads held back) at least once.
module tb_mem_arbiter;
  import neo_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     [N-1:0] m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t [N-1:0] m_req;
  logic [MEM_DW-1:0] m_rsp_data;
  logic s_req_valid, s_req_ready, s_rsp_valid;
  mem_req_t s_req;
  logic [MEM_DW-1:0] s_rsp_data;

  mem_arbiter #(.N(N), .OUTST(8)) dut (.*);
  tb_dram #(.LAT(12), .STALL(15)) u_dram (.clk, .rst_n, .req_valid(s_req_valid), .req(s_req),
                                          .req_ready(s_req_ready), .rsp_valid(s_rsp_valid),
                                          .rsp_data(s_rsp_data));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] shadow [N][64];
  logic [63:0] exp_q [N][$];
  int granted [N];
  int n_full = 0, n_rsp = 0;
  bit load_all = 0, stop = 0;

  // masters: new random request whenever the previous one was accepted
  always @(posedge clk) begin
    if (!rst_n) begin
      m_req_valid <= '0;
      m_req <= '0;
    end else begin
      if (dut.tag_full) n_full++;
      for (int i = 0; i < N; i++) begin
        if (m_req_valid[i] && m_req_ready[i]) begin
          granted[i]++;
          if (m_req[i].we) shadow[i][m_req[i].addr[5:0]] = m_req[i].wdata;
          else exp_q[i].push_back(shadow[i][m_req[i].addr[5:0]]);
        end
        if (!m_req_valid[i] || m_req_ready[i]) begin
          m_req_valid[i] <= !stop && (load_all || ($urandom % 3 == 0));
          m_req[i].we    <= $urandom % 2;
          m_req[i].addr  <= 32'(i * 'h100) + 32'($urandom % 64);
          m_req[i].wdata <= {$urandom, $urandom};
        end
      end
      for (int i = 0; i < N; i++) begin
        if (m_rsp_valid[i]) begin
          checks++;
          n_rsp++;
          if (exp_q[i].size() == 0 || m_rsp_data != exp_q[i][0]) begin
            failures++;
            if (failures < 10) $display("FAIL master %0d response", i);
          end
          if (exp_q[i].size()) void'(exp_q[i].pop_front());
        end
      end
      checks++;
      if ($countones(m_rsp_valid) > 1) failures++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      granted[i] = 0;
      for (int a = 0; a < 64; a++) begin
        shadow[i][a] = 64'(i * 1000 + a);
        u_dram.mem[32'(i * 'h100 + a)] = 64'(i * 1000 + a);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    // full load: every master always requests
    load_all = 1;
    for (int i = 0; i < N; i++) granted[i] = 0;
    repeat (6000) @(posedge clk);
    begin
      int mn, mx;
      mn = granted[0]; mx = granted[0];
      for (int i = 1; i < N; i++) begin
        if (granted[i] < mn) mn = granted[i];
        if (granted[i] > mx) mx = granted[i];
      end
      checks++;
      if (mx - mn > mx / 50) begin failures++; $display("FAIL unfair grants %0d..%0d", mn, mx); end
      $display("grants under full load: %0d %0d %0d", granted[0], granted[1], granted[2]);
    end
    load_all = 0;
    stop = 1;
    repeat (300) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (exp_q[i].size() != 0) begin failures++; $display("FAIL master %0d lost responses", i); end
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL outstanding limit never reached"); end
    $display("responses %0d, cycles at outstanding limit %0d", n_rsp, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
