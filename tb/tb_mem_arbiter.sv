// Testbench of mem_arbiter: three masters issue random reads and writes to
// disjoint address ranges through the arbiter to one memory. Every read
// response must reach the master that asked, in order, with the right data;
// every master must be served (no starvation), and reads in flight never
// exceed MAX_READS. Conflicts (two or more masters requesting in one
// cycle) are counted and must occur.
module tb_mem_arbiter;
  import ssd_accel_pkg::*;
  localparam int NP = 3;
  logic clk = 0, rst_n = 1;  // pulled low at 1 ns: an edge for the asynchronous resets
  mem_req_t [NP-1:0] m_req;
  logic [NP-1:0] m_ready;
  mem_rsp_t [NP-1:0] m_rsp;
  mem_req_t s_req;
  logic s_ready;
  mem_rsp_t s_rsp;
  int checks = 0, failures = 0;
  int conflicts = 0;
  data_t exp_q [NP][$];
  int served [NP];
  int outstanding;

  mem_arbiter #(.NP(NP), .MAX_READS(4)) dut (.*);
  mem_model #(.DEPTH(4096), .LAT(6)) u_mem (.clk, .req(s_req), .req_ready(s_ready), .rsp(s_rsp));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Each master: a random stream of requests to its own 1024-word range.
  for (genvar p = 0; p < NP; p++) begin : g_m
    int remaining = 400;
    always_ff @(posedge clk) begin
      if (!rst_n) m_req[p] <= '0;
      else if (!m_req[p].valid || m_ready[p]) begin
        if (m_req[p].valid && !m_req[p].we) exp_q[p].push_back(u_mem.mem[m_req[p].addr]);
        if (m_req[p].valid) begin remaining--; served[p]++; end
        if (remaining > 0 && ($urandom % 3) != 0) begin
          m_req[p].valid <= 1'b1;
          m_req[p].we    <= 1'($urandom);
          m_req[p].addr  <= addr_t'(p * 1024 + $urandom % 1024);
          m_req[p].wdata <= data_t'($urandom);
        end else m_req[p] <= '0;
      end
      if (m_rsp[p].valid) begin
        checks++;
        if (exp_q[p].size() == 0 || m_rsp[p].rdata != exp_q[p].pop_front()) begin
          failures++;
          if (failures < 10) $display("master %0d bad response", p);
        end
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    if ($countones({m_req[2].valid, m_req[1].valid, m_req[0].valid}) > 1) conflicts++;
    outstanding <= outstanding + int'(s_req.valid && s_ready && !s_req.we) - int'(s_rsp.valid);
    if (outstanding > 4) begin failures++; $display("too many reads in flight"); end
  end

  initial begin
    outstanding = 0;
    foreach (served[p]) served[p] = 0;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = data_t'($urandom);
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (g_m[0].remaining == 0 && g_m[1].remaining == 0 && g_m[2].remaining == 0);
    repeat (20) @(posedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (served[p] != 400 || exp_q[p].size() != 0) begin
        failures++;
        $display("master %0d served %0d, %0d reads unanswered", p, served[p], exp_q[p].size());
      end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("no conflicts"); end
    $display("conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
