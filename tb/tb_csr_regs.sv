// Testbench of csr_regs: writes every configuration register through the
// Avalon-MM port and checks both the configuration the engine sees and the
// value read back (one-cycle read latency); checks the start pulse, the
// done/irq flag and the read-only counters.
module tb_csr_regs;
  import ssd_accel_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [4:0] avs_address = 0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = 0, avs_readdata;
  logic irq;
  layer_cfg_t cfg;
  logic start, busy = 0, done = 0;
  logic [31:0] n_steps = 11, n_wfetch = 22, n_wreuse = 33, n_overlap = 44, n_stall = 55, n_ireuse = 77;
  addr_t frame_base;
  logic [31:0] frame_words, frame_count = 66;
  logic done_slot = 1;
  int checks = 0, failures = 0;

  csr_regs dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); avs_address = 5'(a); avs_write = 1; avs_writedata = d;
    @(negedge clk); avs_write = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk); avs_address = 5'(a); avs_read = 1;
    @(negedge clk); avs_read = 0; d = avs_readdata;
  endtask
  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] v [26];
    repeat (2) @(posedge clk);
    rst_n = 1;
    v[2] = 32'h1234; v[3] = 32'h55555; v[4] = 32'habcdef; v[5] = 300; v[6] = 302; v[7] = 302;
    v[8] = 64; v[9] = 300; v[10] = 300; v[11] = 3; v[12] = 2; v[13] = 11; v[14] = 13;
    v[15] = 1; v[16] = 1; v[17] = 32'h100000; v[18] = 270000;
    for (int a = 2; a <= 18; a++) wr(a, v[a]);
    expect_eq("in_base", cfg.in_base, v[2]);
    expect_eq("w_base", cfg.w_base, v[3]);
    expect_eq("out_base", cfg.out_base, v[4]);
    expect_eq("in_c", 32'(cfg.in_c), v[5]);
    expect_eq("in_h", 32'(cfg.in_h), v[6]);
    expect_eq("in_w", 32'(cfg.in_w), v[7]);
    expect_eq("out_c", 32'(cfg.out_c), v[8]);
    expect_eq("out_h", 32'(cfg.out_h), v[9]);
    expect_eq("out_w", 32'(cfg.out_w), v[10]);
    expect_eq("k", 32'(cfg.k), v[11]);
    expect_eq("stride", 32'(cfg.stride), v[12]);
    expect_eq("tr", 32'(cfg.tr), v[13]);
    expect_eq("frac", 32'(cfg.frac_shift), v[14]);
    expect_eq("relu", 32'(cfg.relu), v[15]);
    expect_eq("pad", 32'(cfg.out_pad), v[16]);
    expect_eq("frame_base", frame_base, v[17]);
    expect_eq("frame_words", frame_words, v[18]);
    for (int a = 2; a <= 18; a++) begin rd(a, d); expect_eq("readback", d, v[a]); end
    // start pulse lasts one cycle
    @(negedge clk); avs_address = 0; avs_write = 1; avs_writedata = 1;
    @(negedge clk); avs_write = 0;
    expect_eq("start", 32'(start), 1);
    @(negedge clk);
    expect_eq("start pulse", 32'(start), 0);
    busy = 1;
    rd(1, d); expect_eq("status busy", d, 1);
    @(negedge clk); busy = 0; done = 1;
    @(negedge clk); done = 0;
    expect_eq("irq", 32'(irq), 1);
    rd(1, d); expect_eq("status done", d, 2);
    wr(1, 2);
    expect_eq("irq cleared", 32'(irq), 0);
    rd(19, d); expect_eq("frame_count", d, 66);
    rd(20, d); expect_eq("done_slot", d, 1);
    rd(21, d); expect_eq("n_steps", d, 11);
    rd(22, d); expect_eq("n_wfetch", d, 22);
    rd(23, d); expect_eq("n_wreuse", d, 33);
    rd(24, d); expect_eq("n_overlap", d, 44);
    rd(25, d); expect_eq("n_stall", d, 55);
    rd(26, d); expect_eq("n_ireuse", d, 77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
