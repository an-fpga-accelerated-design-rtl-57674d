// Testbench of requant: random accumulators and shifts against a reference
// computed in real arithmetic (round half up, saturate, optional ReLU).
module tb_requant;
  import ssd_accel_pkg::*;
  acc_t acc;
  logic [5:0] frac_shift;
  logic relu;
  data_t q;
  int checks = 0, failures = 0;

  requant dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r;
    longint e;
    for (int t = 0; t < 5000; t++) begin
      frac_shift = 6'($urandom % 30);
      relu = 1'($urandom);
      case (t % 3)
        0: acc = acc_t'($signed(32'($urandom)));                          // 32-bit range
        1: acc = acc_t'($signed(32'($urandom))) >>> ($urandom % 20);      // small values
        default: acc = acc_t'({$urandom, $urandom});                      // full 48-bit range
      endcase
      #1;
      r = $floor(real'(acc) / (2.0 ** frac_shift) + 0.5);
      if (r > 32767.0) e = 32767;
      else if (r < -32768.0) e = -32768;
      else e = longint'(r);
      if (relu && e < 0) e = 0;
      checks++;
      if (longint'(q) != e) begin
        failures++;
        if (failures < 10) $display("acc=%0d sh=%0d relu=%b got %0d exp %0d", acc, frac_shift, relu, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
