// DMA reader: copies one contiguous run of external memory into a buffer.
//
// On start it reads len words beginning at mem_addr and writes them, in
// order, to the buffer write port. The buffer location advances through
// lanes: word i goes to lane lane0 + i / wrap at address i % wrap, computed
// with counters. With wrap = len a run fills one lane (one input channel of
// an input tile); with wrap = K*K a run fills one lane per TM*TN coefficient
// kernel (a whole weight tile, stored contiguously in external memory).
// Requests are issued back to back while the memory port is ready; responses
// return in order, any number of cycles later. done pulses for one cycle once
// the last response has been written. start is ignored while busy.
// Coefficients being stored next to one another so that one burst fetches a
// tile follows the design's memory layout; the descriptor format is this
// design's own.
module dma_reader
  import ssd_accel_pkg::*;
#(
  parameter int LANES = 128,
  parameter int DEPTH = 4096
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      start,
  input  addr_t                     mem_addr,
  input  logic [31:0]               len,
  input  logic [$clog2(LANES)-1:0]  lane0,
  input  logic [$clog2(DEPTH)-1:0]  wrap,
  output logic                      busy,
  output logic                      done,
  // memory master
  output mem_req_t                  req,
  input  logic                      req_ready,
  input  mem_rsp_t                  rsp,
  // buffer write port
  output logic                      wr_en,
  output logic [$clog2(LANES)-1:0]  wr_lane,
  output logic [$clog2(DEPTH)-1:0]  wr_addr,
  output data_t                     wr_data
);

  addr_t        addr_q;
  logic [31:0]  issued_q, recvd_q, len_q;
  logic [$clog2(DEPTH)-1:0] wrap_q;

  assign req.valid = busy && (issued_q != len_q);
  assign req.we    = 1'b0;
  assign req.addr  = addr_q;
  assign req.wdata = '0;

  assign wr_en   = busy && rsp.valid;
  assign wr_data = rsp.rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      addr_q   <= '0;
      issued_q <= '0;
      recvd_q  <= '0;
      len_q    <= '0;
      wrap_q   <= '0;
      wr_lane  <= '0;
      wr_addr  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= (len != 0);
          done     <= (len == 0);
          addr_q   <= mem_addr;
          issued_q <= '0;
          recvd_q  <= '0;
          len_q    <= len;
          wrap_q   <= wrap;
          wr_lane  <= lane0;
          wr_addr  <= '0;
        end
      end else begin
        if (req.valid && req_ready) begin
          addr_q   <= addr_q + 1'b1;
          issued_q <= issued_q + 1'b1;
        end
        if (rsp.valid) begin
          recvd_q <= recvd_q + 1'b1;
          if (wr_addr == wrap_q - 1'b1) begin
            wr_addr <= '0;
            wr_lane <= wr_lane + 1'b1;
          end else begin
            wr_addr <= wr_addr + 1'b1;
          end
          if (recvd_q + 1 == len_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
