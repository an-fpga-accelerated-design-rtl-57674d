// DMA writer: stores a finished output tile in external memory.
//
// On start it walks the accumulation buffer channel by channel (n_ch of the
// TM lanes), row by row (rows) and column by column (cols). For each output
// value it reads the pixel's TM sums from the accumulation buffer, picks the
// channel's sum, requantizes it to 16-bit fixed point (shift, round,
// saturate, optional ReLU) and writes it to
//   mem_base + c*ch_stride + r*row_stride + col.
// The strides let the output land inside a zero-padded frame.
// Two-stage pipeline: stage A is the buffer read (data one cycle later),
// stage B the memory request register. Both advance whenever the request is
// accepted or empty, so a word leaves every cycle while the port is ready;
// while it is not, no new read is issued and the read data stays put.
// done pulses for one cycle after the last write is accepted.
// Writing finished results back by DMA follows the design; the order, the
// strides and the pipeline are this design's choices.
module dma_writer
  import ssd_accel_pkg::*;
#(
  parameter int TM    = 16,
  parameter int DEPTH = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      start,
  input  addr_t                     mem_base,
  input  logic [$clog2(TM+1)-1:0]   n_ch,
  input  dim_t                      rows,
  input  dim_t                      cols,
  input  addr_t                     ch_stride,
  input  addr_t                     row_stride,
  input  logic [5:0]                frac_shift,
  input  logic                      relu,
  output logic                      busy,
  output logic                      done,
  // accumulator buffer read port
  output logic                      rd_en,
  output logic [$clog2(DEPTH)-1:0]  rd_addr,
  input  acc_t [TM-1:0]             rd_data,
  // memory master
  output mem_req_t                  req,
  input  logic                      req_ready
);

  logic [$clog2(TM+1)-1:0] c_q, nch_q;
  dim_t  r_q, col_q, rows_q, cols_q;
  addr_t base_q, chs_q, rows_stride_q;
  logic [$clog2(DEPTH)-1:0] pix_q;
  logic [5:0] shift_q;
  logic relu_q;
  data_t q;

  logic  run_q;       // words remain to be issued
  logic  a_v;         // stage A: a read is on rd_data
  addr_t a_addr;
  logic [$clog2(TM)-1:0] a_ch;
  logic  b_v;         // stage B: memory request
  addr_t b_addr;
  data_t b_data;
  logic  adv, issue;

  requant u_rq (
    .acc(rd_data[a_ch]), .frac_shift(shift_q), .relu(relu_q), .q(q)
  );

  assign adv     = !b_v || req_ready;
  assign issue   = run_q && adv;
  assign rd_en   = issue;
  assign rd_addr = pix_q;
  assign busy    = run_q || a_v || b_v;

  assign req.valid = b_v;
  assign req.we    = 1'b1;
  assign req.addr  = b_addr;
  assign req.wdata = b_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done  <= 1'b0;
      run_q <= 1'b0;
      a_v   <= 1'b0;
      b_v   <= 1'b0;
      {a_addr, b_addr, b_data, a_ch} <= '0;
      {c_q, nch_q, r_q, col_q, rows_q, cols_q} <= '0;
      {base_q, chs_q, rows_stride_q} <= '0;
      pix_q   <= '0;
      shift_q <= '0;
      relu_q  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        nch_q  <= n_ch;  rows_q <= rows;  cols_q <= cols;
        chs_q  <= ch_stride;  rows_stride_q <= row_stride;
        base_q <= mem_base;
        shift_q <= frac_shift;  relu_q <= relu;
        c_q <= '0;  r_q <= '0;  col_q <= '0;  pix_q <= '0;
        if (n_ch == 0 || rows == 0 || cols == 0) done <= 1'b1;
        else run_q <= 1'b1;
      end
      if (adv) begin
        // stage B takes stage A's word
        b_v    <= a_v;
        b_addr <= a_addr;
        b_data <= q;
        if (b_v && !a_v && !run_q) done <= 1'b1;   // last word accepted
        // stage A takes the word issued now
        a_v <= issue;
        if (issue) begin
          a_addr <= base_q + addr_t'(c_q) * chs_q + addr_t'(r_q) * rows_stride_q
                    + addr_t'(col_q);
          a_ch   <= c_q[$clog2(TM)-1:0];
          if (col_q + 1 < cols_q) begin
            col_q <= col_q + 1'b1;  pix_q <= pix_q + 1'b1;
          end else if (r_q + 1 < rows_q) begin
            col_q <= '0;  r_q <= r_q + 1'b1;  pix_q <= pix_q + 1'b1;
          end else if (32'(c_q) + 1 < 32'(nch_q)) begin
            col_q <= '0;  r_q <= '0;  pix_q <= '0;  c_q <= c_q + 1'b1;
          end else begin
            run_q <= 1'b0;
          end
        end
      end
    end
  end

endmodule
