// Testbench of dma_reader: reads runs of random memory with different wraps
// (one lane per run, and K*K words per lane) through a memory with random
// back-pressure, and checks every buffer write's lane, address and data and
// the number of writes. The memory port accepts at most one word per cycle,
// so a run of len words needs at least len cycles; the testbench also checks
// that the run completes within len*4+20 cycles.
module tb_dma_reader;
  import ssd_accel_pkg::*;
  localparam int LANES = 16, DEPTH = 256;
  logic clk = 0, rst_n = 1;  // pulled low at 1 ns: an edge for the asynchronous resets
  logic start = 0;
  addr_t mem_addr = 0;
  logic [31:0] len = 0;
  logic [3:0] lane0 = 0;
  logic [7:0] wrap = 0;
  logic busy, done;
  mem_req_t req;
  logic req_ready;
  mem_rsp_t rsp;
  logic wr_en;
  logic [3:0] wr_lane;
  logic [7:0] wr_addr;
  data_t wr_data;
  int checks = 0, failures = 0;
  int nwr;
  int exp_i;
  addr_t base_q;
  int wrap_q, lane0_q;

  dma_reader #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);
  mem_model #(.DEPTH(4096)) u_mem (.clk, .req, .req_ready, .rsp);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (wr_en) begin
    checks++;
    if (wr_data != u_mem.mem[base_q + addr_t'(exp_i)] ||
        wr_lane != 4'(lane0_q + exp_i / wrap_q) || wr_addr != 8'(exp_i % wrap_q)) begin
      failures++;
      if (failures < 10) $display("i=%0d lane %0d addr %0d data %h", exp_i, wr_lane, wr_addr, wr_data);
    end
    exp_i++;
  end

  initial begin
    int cyc;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = data_t'($urandom);
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      base_q  = addr_t'($urandom % 3000);
      wrap_q  = (t % 2) ? 9 : 1 + ($urandom % 200);
      lane0_q = (t % 2) ? 0 : int'($urandom % LANES);
      len     = (t % 2) ? 32'(9 * (1 + $urandom % 15)) : 32'(wrap_q);
      mem_addr = base_q; wrap = 8'(wrap_q); lane0 = 4'(lane0_q);
      exp_i = 0;
      start = 1;
      @(negedge clk) start = 0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (exp_i != int'(len) || cyc > int'(len) * 4 + 20) begin
        failures++;
        $display("run %0d: %0d of %0d words in %0d cycles", t, exp_i, len, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
