// Testbench of frame_writer: streams several frames of random pixels with
// random gaps, under memory back-pressure, and checks that frame f lands in
// slot f%2, that frame_done/done_slot/frame_count report each frame, and
// that an early start-of-frame abandons a partial frame.
module tb_frame_writer;
  import ssd_accel_pkg::*;
  localparam int FW = 48;
  logic clk = 0, rst_n = 1;  // pulled low at 1 ns: an edge for the asynchronous resets
  addr_t frame_base = 1000;
  logic [31:0] frame_words = FW;
  logic px_valid = 0, px_sof = 0;
  data_t px_data = 0;
  logic px_ready;
  mem_req_t req;
  logic req_ready;
  mem_rsp_t rsp;
  logic frame_done, done_slot;
  logic [31:0] frame_count;
  int checks = 0, failures = 0;
  int ndone = 0;
  logic last_slot;

  frame_writer dut (.*);
  mem_model #(.DEPTH(4096)) u_mem (.clk, .req, .req_ready, .rsp);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (frame_done) begin ndone++; last_slot = done_slot; end

  task automatic send(input data_t d, input bit sof);
    @(negedge clk);
    px_valid = 1; px_sof = sof; px_data = d;
    @(posedge clk);
    while (!px_ready) @(posedge clk);
    @(negedge clk) px_valid = 0; px_sof = 0;
    if (($urandom % 4) == 0) @(negedge clk);
  endtask

  initial begin
    data_t f [FW];
    int exp_count;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_count = 0;
    for (int fr = 0; fr < 6; fr++) begin
      if (fr == 3) begin  // partial frame, then a new start of frame
        for (int i = 0; i < 10; i++) send(16'hdead, i == 0);
      end
      for (int i = 0; i < FW; i++) begin
        f[i] = data_t'($urandom);
        send(f[i], i == 0);
      end
      repeat (3) @(posedge clk);
      exp_count++;
      // frames 0,1,2 use slots 0,1,0; the partial frame takes slot 1, so
      // frame 3 goes to slot 0, and so on.
      checks++;
      if (frame_count != 32'(exp_count) || ndone != exp_count ||
          last_slot != 1'((fr < 3) ? fr % 2 : (fr + 1) % 2)) begin
        failures++;
        $display("frame %0d: count %0d done %0d slot %0d", fr, frame_count, ndone, last_slot);
      end
      for (int i = 0; i < FW; i++) begin
        checks++;
        if (u_mem.mem[frame_base + (last_slot ? FW : 0) + i] != f[i]) begin
          failures++;
          if (failures < 10) $display("frame %0d word %0d wrong", fr, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
