// Testbench of dma_writer: a model of the accumulation buffer (one-cycle
// read) holds random sums; the writer must store every selected channel,
// row and column, requantized, at base + c*ch_stride + r*row_stride + col,
// and touch no other address (the memory is prefilled with a marker).
// The writer must sustain one word per cycle: start to done may take no more
// than the word count plus the cycles the memory held ready low, plus 3.
module tb_dma_writer;
  import ssd_accel_pkg::*;
  localparam int TM = 4, DEPTH = 64;
  localparam data_t MARK = 16'h5a5a;
  logic clk = 0, rst_n = 1;  // pulled low at 1 ns: an edge for the asynchronous resets
  logic start = 0;
  addr_t mem_base, ch_stride, row_stride;
  logic [2:0] n_ch;
  dim_t rows, cols;
  logic [5:0] frac_shift;
  logic relu;
  logic busy, done;
  logic rd_en;
  logic [5:0] rd_addr;
  acc_t [TM-1:0] rd_data;
  mem_req_t req;
  logic req_ready;
  mem_rsp_t rsp;
  acc_t accm [DEPTH][TM];
  int checks = 0, failures = 0;

  dma_writer #(.TM(TM), .DEPTH(DEPTH)) dut (.*);
  mem_model #(.DEPTH(4096)) u_mem (.clk, .req, .req_ready, .rsp);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (rd_en) for (int j = 0; j < TM; j++) rd_data[j] <= accm[rd_addr][j];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t rq(acc_t a, int sh, bit rl);
    real r; longint e;
    r = $floor(real'(a) / (2.0 ** sh) + 0.5);
    if (r > 32767.0) e = 32767; else if (r < -32768.0) e = -32768; else e = longint'(r);
    if (rl && e < 0) e = 0;
    return data_t'(e);
  endfunction

  initial begin
    int pad, cyc, held;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      for (int i = 0; i < 4096; i++) u_mem.mem[i] = MARK;
      for (int p = 0; p < DEPTH; p++) for (int j = 0; j < TM; j++)
        accm[p][j] = acc_t'($signed(32'($urandom))) >>> ($urandom % 16);
      pad = t % 3;
      n_ch = 3'(1 + t % TM);
      rows = dim_t'(1 + $urandom % 5);
      cols = dim_t'(1 + $urandom % 8);
      row_stride = addr_t'(cols) + addr_t'(2 * pad);
      ch_stride  = (addr_t'(rows) + addr_t'(2 * pad)) * row_stride;
      mem_base = 100 + addr_t'(pad) * row_stride + addr_t'(pad);
      frac_shift = 6'($urandom % 12);
      relu = 1'(t % 2);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1; held = 0;
      while (!done) begin
        if (req.valid && !req_ready) held++;
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc > int'(n_ch) * int'(rows) * int'(cols) + held + 3) begin
        failures++;
        $display("%0d words took %0d cycles (%0d held)", int'(n_ch) * int'(rows) * int'(cols), cyc, held);
      end
      for (int a = 0; a < 4096; a++) begin
        bit hit; int c, r, col, rel;
        hit = 0;
        rel = a - int'(mem_base);
        if (rel >= 0) begin
          c = rel / int'(ch_stride); r = (rel % int'(ch_stride)) / int'(row_stride);
          col = (rel % int'(ch_stride)) % int'(row_stride);
          hit = (c < int'(n_ch)) && (r < int'(rows)) && (col < int'(cols));
        end
        if (hit) begin
          checks++;
          if (u_mem.mem[a] != rq(accm[r * int'(cols) + col][c], int'(frac_shift), relu)) begin
            failures++;
            if (failures < 10) $display("c%0d r%0d col%0d got %h", c, r, col, u_mem.mem[a]);
          end
        end else if (u_mem.mem[a] != MARK) begin
          failures++;
          if (failures < 10) $display("stray write at %0d", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
