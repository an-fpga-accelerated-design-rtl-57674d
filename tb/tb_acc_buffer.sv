// Testbench of acc_buffer: accumulates several rounds of random partial sums
// per pixel (the first with clear) and reads the totals back.
module tb_acc_buffer;
  import ssd_accel_pkg::*;
  localparam int TM = 4, DEPTH = 32;
  logic clk = 0;
  logic acc_valid = 0, acc_clear = 0, rd_en = 0;
  logic [4:0] acc_addr = 0, rd_addr = 0;
  acc_t [TM-1:0] acc_in, rd_data;
  longint ref_sum [DEPTH][TM];
  int checks = 0, failures = 0;

  acc_buffer #(.TM(TM), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_in = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int round = 0; round < 4; round++) begin
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk);
          acc_valid = 1; acc_clear = (round == 0); acc_addr = 5'(a);
          for (int j = 0; j < TM; j++) begin
            acc_in[j] = acc_t'($signed(32'($urandom)));
            ref_sum[a][j] = (round == 0 ? 0 : ref_sum[a][j]) + longint'(acc_in[j]);
          end
        end
        @(negedge clk) acc_valid = 0;
      end
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); rd_en = 1; rd_addr = 5'(a);
        @(negedge clk); rd_en = 0;
        for (int j = 0; j < TM; j++) begin
          checks++;
          if (rd_data[j] != acc_t'(ref_sum[a][j])) begin
            failures++;
            if (failures < 10) $display("addr %0d lane %0d got %0d exp %0d", a, j, rd_data[j], ref_sum[a][j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
