// End-to-end testbench of ssd_accel_top at its default parameters.
//
// Acting as the soft processor, it programs the accelerator over the
// register port; acting as the camera it streams frames; a memory model
// stands in for the memory controller and DRAM. One camera frame (3 planes
// of 18 x 18 words, already zero-padded) is stored, then run through three
// convolution layers, each reading the previous layer's output from memory:
//   A: 3 -> 20 channels, 3x3, stride 1, ReLU, output padded for B
//   B: 20 -> 10 channels, 3x3, stride 2 (three input-channel tiles)
//   C: 10 -> 40 channels, 1x1 (input planes stay on chip across the
//      three output-channel tiles)
// A second frame streams in while layer B runs. Every output word of every
// layer is compared with a convolution computed here, and the second frame
// is checked in its slot. It counts how often each mechanism happened and
// fails if one never did: weight fetch, weight reuse, input reuse, load/compute overlap,
// compute waiting for a load, partial sums over several input tiles, stride
// 2, saturation, ReLU, memory conflicts between the camera and the engine,
// frame completion and the done interrupt.
module tb_ssd_accel_top;
  import ssd_accel_pkg::*;
  localparam int TN = 8, TM = 16;          // the top's defaults
  localparam int MEMW = 65536;
  localparam int FH = 18, FW = 18, FC = 3;
  logic clk = 0, rst_n = 1;  // pulled low at 1 ns: an edge for the asynchronous resets
  logic [4:0] avs_address = 0;
  logic avs_write = 0, avs_read = 0;
  logic [31:0] avs_writedata = 0, avs_readdata;
  logic irq, frame_done;
  logic px_valid = 0, px_sof = 0;
  data_t px_data = 0;
  logic px_ready;
  mem_req_t mem_req;
  logic mem_ready;
  mem_rsp_t mem_rsp;
  int checks = 0, failures = 0;
  int c_fetch = 0, c_reuse = 0, c_ireuse = 0, c_overlap = 0, c_stall = 0, c_multi_ti = 0;
  int c_stride2 = 0, c_sat = 0, c_relu = 0, c_conflict = 0, c_frames = 0, c_irq = 0;

  ssd_accel_top dut (.*);
  mem_model #(.DEPTH(MEMW)) u_mem (.clk, .req(mem_req), .req_ready(mem_ready), .rsp(mem_rsp));

  always #5 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (dut.m_req[0].valid && (dut.m_req[1].valid || dut.m_req[2].valid)) c_conflict++;
    if (frame_done) c_frames++;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); avs_address = 5'(a); avs_write = 1; avs_writedata = d;
    @(negedge clk); avs_write = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk); avs_address = 5'(a); avs_read = 1;
    @(negedge clk); avs_read = 0; d = avs_readdata;
  endtask

  // camera: a frame of FC*FH*FW words, zero border, random inside
  data_t frame [2][FC*FH*FW];
  task automatic make_frame(input int f);
    for (int c = 0; c < FC; c++) for (int y = 0; y < FH; y++) for (int x = 0; x < FW; x++)
      frame[f][(c * FH + y) * FW + x] = (y == 0 || x == 0 || y == FH-1 || x == FW-1) ? '0 :
                                        data_t'($signed($urandom % 511) - 255);
  endtask
  task automatic stream_frame(input int f);
    for (int i = 0; i < FC*FH*FW; i++) begin
      @(negedge clk); px_valid = 1; px_sof = (i == 0); px_data = frame[f][i];
      @(posedge clk); while (!px_ready) @(posedge clk);
      @(negedge clk); px_valid = 0; px_sof = 0;
    end
  endtask

  function automatic int cdiv(int a, int b); return (a + b - 1) / b; endfunction

  // Place random weights for a layer in the tiled layout the engine expects.
  task automatic put_weights(input int wb, ic, oc, k, amp);
    int nti, nto, wt;
    nti = cdiv(ic, TN); nto = cdiv(oc, TM); wt = TM * TN * k * k;
    for (int t = 0; t < nto * nti * wt; t++) begin
      int oi, ii, j, q;
      oi = (t / wt) / nti; ii = (t / wt) % nti; j = (t % wt) / (TN * k * k);
      q = ((t % wt) / (k * k)) % TN;
      u_mem.mem[wb + t] = (oi * TM + j < oc && ii * TN + q < ic) ?
                          data_t'($signed($urandom % (2 * amp + 1)) - amp) : '0;
    end
  endtask

  task automatic run_layer(input int ib, wb, ob, ic, ih, iw, oc, k, s, tr, sh, rl, pad);
    int oh, ow, nti, rowo, planeo, wt;
    logic [31:0] d;
    longint acc; real r; longint e;
    oh = (ih - k) / s + 1; ow = (iw - k) / s + 1;
    nti = cdiv(ic, TN); wt = TM * TN * k * k;
    rowo = ow + 2 * pad; planeo = (oh + 2 * pad) * rowo;
    for (int i = 0; i < oc * planeo; i++) u_mem.mem[ob + i] = '0;   // host zeroes the frame
    wr(2, ib); wr(3, wb); wr(4, ob); wr(5, ic); wr(6, ih); wr(7, iw); wr(8, oc);
    wr(9, oh); wr(10, ow); wr(11, k); wr(12, s); wr(13, tr); wr(14, sh); wr(15, rl); wr(16, pad);
    wr(0, 1);
    @(negedge clk);
    while (!irq) @(negedge clk);
    c_irq++;
    rd(1, d);
    checks++;
    if (d[1] != 1'b1) begin failures++; $display("status not done"); end
    rd(22, d); c_fetch += int'(d);
    rd(23, d); c_reuse += int'(d);
    rd(24, d); c_overlap += int'(d);
    rd(25, d); c_stall += int'(d);
    rd(26, d); c_ireuse += int'(d);
    wr(1, 2);
    if (nti > 1) c_multi_ti++;
    if (s == 2) c_stride2++;
    for (int rr = 0; rr < oc; rr++)
      for (int m = 0; m < oh; m++)
        for (int n = 0; n < ow; n++) begin
          acc = 0;
          for (int q = 0; q < ic; q++)
            for (int kr = 0; kr < k; kr++)
              for (int kc = 0; kc < k; kc++)
                acc += longint'(u_mem.mem[wb + ((rr / TM) * nti + q / TN) * wt
                                          + (((rr % TM) * TN + q % TN) * k + kr) * k + kc]) *
                       longint'(u_mem.mem[ib + q * ih * iw + (s * m + kr) * iw + s * n + kc]);
          r = $floor(real'(acc) / (2.0 ** sh) + 0.5);
          if (r > 32767.0) begin e = 32767; c_sat++; end
          else if (r < -32768.0) begin e = -32768; c_sat++; end
          else e = longint'(r);
          if (rl && e < 0) begin e = 0; c_relu++; end
          checks++;
          if (u_mem.mem[ob + rr * planeo + (m + pad) * rowo + n + pad] != data_t'(e)) begin
            failures++;
            if (failures < 10) $display("out %0d,%0d,%0d got %0d exp %0d", rr, m, n,
              u_mem.mem[ob + rr * planeo + (m + pad) * rowo + n + pad], e);
          end
        end
    $display("layer %0d->%0d k=%0d s=%0d done", ic, oc, k, s);
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < MEMW; i++) u_mem.mem[i] = '0;
    make_frame(0); make_frame(1);
    put_weights(4000, 3, 20, 3, 300);
    put_weights(8000, 20, 10, 3, 200);
    put_weights(12000, 10, 40, 1, 3000);
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(17, 0); wr(18, FC*FH*FW);
    stream_frame(0);
    repeat (3) @(posedge clk);
    rd(20, d);   // slot of the finished frame
    checks++;
    if (d != 0) begin failures++; $display("frame 0 in slot %0d", d); end
    for (int i = 0; i < FC*FH*FW; i++) begin
      checks++;
      if (u_mem.mem[i] != frame[0][i]) begin failures++; $display("frame word %0d", i); break; end
    end
    run_layer(0, 4000, 20000, 3, FH, FW, 20, 3, 1, 5, 8, 1, 1);
    fork
      run_layer(20000, 8000, 30000, 20, 18, 18, 10, 3, 2, 8, 6, 0, 0);
      stream_frame(1);
    join
    run_layer(30000, 12000, 32000, 10, 8, 8, 40, 1, 1, 8, 4, 0, 0);
    rd(19, d);
    checks += 2;
    if (d != 2) begin failures++; $display("frame count %0d", d); end
    for (int i = 0; i < FC*FH*FW; i++)
      if (u_mem.mem[FC*FH*FW + i] != frame[1][i]) begin failures++; $display("frame 1 word %0d", i); break; end
    $display("mechanisms: ireuse=%0d fetch=%0d reuse=%0d overlap=%0d stall=%0d multi_ti=%0d stride2=%0d sat=%0d relu=%0d conflict=%0d frames=%0d irq=%0d",
             c_ireuse, c_fetch, c_reuse, c_overlap, c_stall, c_multi_ti, c_stride2, c_sat, c_relu, c_conflict, c_frames, c_irq);
    checks += 12;
    if (c_ireuse == 0)   begin failures++; $display("never: input reuse"); end
    if (c_fetch == 0)    begin failures++; $display("never: weight fetch"); end
    if (c_reuse == 0)    begin failures++; $display("never: weight reuse"); end
    if (c_overlap == 0)  begin failures++; $display("never: overlap"); end
    if (c_stall == 0)    begin failures++; $display("never: stall"); end
    if (c_multi_ti == 0) begin failures++; $display("never: multi input tile"); end
    if (c_stride2 == 0)  begin failures++; $display("never: stride 2"); end
    if (c_sat == 0)      begin failures++; $display("never: saturation"); end
    if (c_relu == 0)     begin failures++; $display("never: relu"); end
    if (c_conflict == 0) begin failures++; $display("never: conflict"); end
    if (c_frames != 2)   begin failures++; $display("frames %0d", c_frames); end
    if (c_irq != 3)      begin failures++; $display("irq %0d", c_irq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
