// Testbench of pe_array: every PE's sum over a random K*K window is checked
// against a reference; input vector broadcast, weights per PE.
module tb_pe_array;
  import ssd_accel_pkg::*;
  localparam int TN = 4, TM = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  data_t [TN-1:0] x;
  data_t [TM-1:0][TN-1:0] w;
  logic out_valid;
  acc_t [TM-1:0] out_sum;
  int checks = 0, failures = 0;

  pe_array #(.TN(TN), .TM(TM)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_sum [TM];
    int taps;
    x = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      taps = (t % 2) ? 9 : 1;
      foreach (exp_sum[j]) exp_sum[j] = 0;
      for (int tap = 0; tap < taps; tap++) begin
        @(negedge clk);
        for (int i = 0; i < TN; i++) x[i] = data_t'($urandom);
        for (int j = 0; j < TM; j++)
          for (int i = 0; i < TN; i++) begin
            w[j][i] = data_t'($urandom);
            exp_sum[j] += longint'(x[i]) * longint'(w[j][i]);
          end
        in_valid = 1; in_first = (tap == 0); in_last = (tap == taps-1);
        @(posedge clk); #1;
      end
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no valid"); end
      for (int j = 0; j < TM; j++) begin
        checks++;
        if (out_sum[j] != acc_t'(exp_sum[j])) begin
          failures++;
          $display("win %0d pe %0d got %0d exp %0d", t, j, out_sum[j], exp_sum[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
