// Testbench of conv_engine: runs three small layers through the engine with
// a memory model, and compares every output word with a convolution computed
// here from the same memory image. The layers cover partial input- and
// output-channel tiles (partial sums across input tiles), several row bands,
// stride 2, a 1x1 kernel, output padding, ReLU and saturation. It checks the
// step count, that resident weights are reused when all input channels fit
// one tile, that resident input planes are reused across output-channel
// tiles when a layer has one row band, that a band's write-back overlaps the
// next band's computation, that loads overlap computation, and that each step takes
// rows*out_w*K*K compute cycles plus the 3-cycle drain.
module tb_conv_engine;
  import ssd_accel_pkg::*;
  localparam int TN = 4, TM = 4;
  localparam int MEMW = 8192;
  localparam data_t MARK = 16'h7e7e;
  logic clk = 0, rst_n = 1;  // pulled low at 1 ns: an edge for the asynchronous resets
  logic start = 0;
  layer_cfg_t cfg;
  logic busy, done;
  mem_req_t rd_req, wr_req, req;
  logic rd_ready, wr_ready, req_ready;
  mem_rsp_t rd_rsp, rsp;
  logic [31:0] n_steps, n_wfetch, n_wreuse, n_ireuse, n_overlap, n_stall;
  int checks = 0, failures = 0;
  int ireuse_total = 0, reuse_total = 0, overlap_total = 0, sat_seen = 0, relu_seen = 0;

  conv_engine #(.TN(TN), .TM(TM), .KMAX(3), .IBUF_DEPTH(256), .OBUF_DEPTH(64)) dut (.*);

  // Two masters share the memory model: the writer has priority here.
  mem_model #(.DEPTH(MEMW)) u_mem (.clk, .req, .req_ready, .rsp);
  assign req      = wr_req.valid ? wr_req : rd_req;
  assign wr_ready = req_ready;
  assign rd_ready = req_ready && !wr_req.valid;
  assign rd_rsp   = rsp;

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Count compute cycles (C_RUN) to check the timing of each step.
  int run_cycles;
  int wb_overlap = 0;
  always @(posedge clk) if (dut.cp_rd_en) run_cycles++;
  always @(posedge clk) if (dut.cp_rd_en && dut.dw_busy) wb_overlap++;

  function automatic int cdiv(int a, int b); return (a + b - 1) / b; endfunction

  task automatic run_layer(input int ic, ih, iw, oc, k, s, tr, sh, rl, pad);
    int oh, ow, nti, nto, wt, rowo, planeo, nb, exp_steps, exp_cycles;
    longint acc; real r; longint e;
    oh = (ih - k) / s + 1; ow = (iw - k) / s + 1;
    nti = cdiv(ic, TN); nto = cdiv(oc, TM); wt = TM * TN * k * k;
    rowo = ow + 2 * pad; planeo = (oh + 2 * pad) * rowo;
    for (int i = 0; i < MEMW; i++) u_mem.mem[i] = (i >= 5000) ? MARK : data_t'(0);
    for (int i = 0; i < ic * ih * iw; i++) u_mem.mem[i] = data_t'($signed($urandom % 4001) - 2000);
    for (int t = 0; t < nto * nti * wt; t++) begin
      int oi, ii, j, q, r0;
      oi = (t / wt) / nti; ii = (t / wt) % nti; j = (t % wt) / (TN * k * k);
      q = ((t % wt) / (k * k)) % TN;
      if (oi * TM + j < oc && ii * TN + q < ic)
        u_mem.mem[2000 + t] = data_t'($signed($urandom % 4001) - 2000);
    end
    cfg = '{in_base: 0, w_base: 2000, out_base: 5000, in_c: dim_t'(ic), in_h: dim_t'(ih),
            in_w: dim_t'(iw), out_c: dim_t'(oc), out_h: dim_t'(oh), out_w: dim_t'(ow),
            k: 4'(k), stride: 2'(s), tr: dim_t'(tr), frac_shift: 6'(sh), relu: rl[0],
            out_pad: 4'(pad)};
    run_cycles = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    // reference
    for (int rr = 0; rr < oc; rr++)
      for (int m = 0; m < oh; m++)
        for (int n = 0; n < ow; n++) begin
          acc = 0;
          for (int q = 0; q < ic; q++)
            for (int kr = 0; kr < k; kr++)
              for (int kc = 0; kc < k; kc++) begin
                int widx;
                widx = 2000 + ((rr / TM) * nti + q / TN) * wt
                       + (((rr % TM) * TN + q % TN) * k + kr) * k + kc;
                acc += longint'(u_mem.mem[widx]) *
                       longint'(u_mem.mem[q * ih * iw + (s * m + kr) * iw + s * n + kc]);
              end
          r = $floor(real'(acc) / (2.0 ** sh) + 0.5);
          if (r > 32767.0) begin e = 32767; sat_seen++; end
          else if (r < -32768.0) begin e = -32768; sat_seen++; end
          else e = longint'(r);
          if (rl && e < 0) begin e = 0; relu_seen++; end
          checks++;
          if (u_mem.mem[5000 + rr * planeo + (m + pad) * rowo + n + pad] != data_t'(e)) begin
            failures++;
            if (failures < 10) $display("r%0d m%0d n%0d got %0d exp %0d", rr, m, n,
              u_mem.mem[5000 + rr * planeo + (m + pad) * rowo + n + pad], e);
          end
        end
    // the padding ring is left untouched
    for (int rr = 0; rr < oc; rr++) begin
      checks++;
      if (pad > 0 && u_mem.mem[5000 + rr * planeo] != MARK) begin failures++; $display("pad written"); end
    end
    nb = cdiv(oh, tr);
    exp_steps = nto * nb * nti;
    exp_cycles = nto * nti * oh * ow * k * k;
    checks += 3;
    if (n_steps != 32'(exp_steps)) begin failures++; $display("steps %0d exp %0d", n_steps, exp_steps); end
    if (n_wfetch + n_wreuse != 32'(exp_steps)) begin failures++; $display("fetch+reuse %0d", n_wfetch + n_wreuse); end
    if (run_cycles != exp_cycles) begin failures++; $display("compute cycles %0d exp %0d", run_cycles, exp_cycles); end
    if (nti == 1 && nb > 2) begin
      checks++;
      if (n_wfetch > 32'(2 * nto)) begin failures++; $display("weights refetched: %0d", n_wfetch); end
    end
    reuse_total += int'(n_wreuse);
    ireuse_total += int'(n_ireuse);
    overlap_total += int'(n_overlap);
    if (nb == 1 && nti <= 2 && nto > 1) begin
      // input planes stay resident across the output-channel tiles
      checks++;
      if (n_ireuse != 32'((nto - 1) * nti)) begin failures++; $display("input reuse %0d", n_ireuse); end
    end
    $display("layer ic=%0d oc=%0d k=%0d s=%0d: steps=%0d fetch=%0d reuse=%0d ireuse=%0d overlap=%0d stall=%0d",
             ic, oc, k, s, n_steps, n_wfetch, n_wreuse, n_ireuse, n_overlap, n_stall);
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_layer(6, 10, 10, 6, 3, 1, 3, 12, 1, 1);
    run_layer(3, 11, 11, 5, 3, 2, 1, 10, 0, 0);
    run_layer(8, 6, 6, 4, 1, 1, 6, 6, 0, 2);
    run_layer(7, 7, 7, 11, 3, 1, 5, 11, 1, 0);
    checks += 6;
    if (wb_overlap == 0)    begin failures++; $display("write-back never overlapped compute"); end
    if (ireuse_total == 0)  begin failures++; $display("no input reuse"); end
    if (reuse_total == 0)   begin failures++; $display("no weight reuse"); end
    if (overlap_total == 0) begin failures++; $display("no load/compute overlap"); end
    if (sat_seen == 0)      begin failures++; $display("no saturation"); end
    if (relu_seen == 0)     begin failures++; $display("no relu"); end
    $display("write-back overlapped compute for %0d cycles", wb_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
