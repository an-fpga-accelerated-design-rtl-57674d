// Testbench of pingpong_buffer: fills both banks with different random data,
// reads every address of every lane back from each bank (one-cycle read
// latency) and checks that writing one bank leaves the other intact.
module tb_pingpong_buffer;
  import ssd_accel_pkg::*;
  localparam int LANES = 4, DEPTH = 64;
  logic clk = 0;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [1:0] wr_lane = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  data_t wr_data = 0;
  data_t [LANES-1:0] rd_data;
  data_t ref_mem [2][LANES][DEPTH];
  int checks = 0, failures = 0;

  pingpong_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int b);
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_lane = 2'(l); wr_addr = 6'(a);
        wr_data = data_t'($urandom);
        ref_mem[b][l][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
  endtask

  task automatic check(input int b);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_bank = 1'(b); rd_addr = 6'(a);
      @(negedge clk);
      rd_en = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rd_data[l] != ref_mem[b][l][a]) begin
          failures++;
          if (failures < 10) $display("bank %0d lane %0d addr %0d got %h exp %h", b, l, a, rd_data[l], ref_mem[b][l][a]);
        end
      end
    end
  endtask

  initial begin
    fill(0); fill(1);
    check(0); check(1);
    fill(0);        // refill bank 0: bank 1 must be untouched
    check(1); check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
