// Testbench of pe: random 9-tap windows of TN products, checked against a
// sum computed here; the sum must appear exactly one cycle after the last tap.
module tb_pe;
  import ssd_accel_pkg::*;
  localparam int TN = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  data_t [TN-1:0] x, w;
  logic out_valid;
  acc_t out_sum;
  int checks = 0, failures = 0;

  pe #(.TN(TN)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_sum;
    x = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      exp_sum = 0;
      for (int tap = 0; tap < 9; tap++) begin
        @(negedge clk);
        for (int i = 0; i < TN; i++) begin
          if (t < 3) begin  // extremes first
            x[i] = (t == 0) ? -16'sd32768 : 16'sd32767;
            w[i] = (t == 2) ? 16'sd32767 : -16'sd32768;
          end else begin
            x[i] = data_t'($urandom);
            w[i] = data_t'($urandom);
          end
          exp_sum += longint'(x[i]) * longint'(w[i]);
        end
        in_valid = 1; in_first = (tap == 0); in_last = (tap == 8);
        @(posedge clk); #1;
        if (tap < 8 && out_valid) begin failures++; $display("early valid"); end
      end
      in_valid = 0; in_last = 0;
      // one cycle after the last tap
      checks++;
      if (!out_valid || out_sum != acc_t'(exp_sum)) begin
        failures++;
        $display("window %0d: got %0d exp %0d v=%b", t, out_sum, exp_sum, out_valid);
      end
      if (($urandom % 3) == 0) @(posedge clk);  // idle gaps hold the sum
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
