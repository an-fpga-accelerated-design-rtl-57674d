// Convolution accelerator for the SSD pedestrian detector, FPGA side.
//
// Camera frames arrive as a pixel stream and are stored in external memory
// by the frame writer. The soft processor, through the register port,
// programs the network one convolution layer at a time; the convolution
// engine fetches input and coefficient tiles from external memory, computes
// the layer in 16-bit fixed point and writes the output feature map back,
// where the next layer reads it. The three memory masters (frame writer,
// engine write-back, engine tile loads) share the one memory-controller port
// through a round-robin arbiter. The processor, the memory controller with
// its DRAM and the camera link are outside this module: their signals are
// the ports below. irq rises when a layer is finished.
// The split into camera-frame storage, processor-programmed DMA and a tiled
// convolution engine follows the design; the interfaces are this design's.
module ssd_accel_top
  import ssd_accel_pkg::*;
#(
  parameter int TN         = 8,
  parameter int TM         = 16,
  parameter int KMAX       = 3,
  parameter int IBUF_DEPTH = 4096,
  parameter int OBUF_DEPTH = 2048,
  parameter int MAX_READS  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // soft-processor register port (Avalon-MM slave)
  input  logic [4:0]  avs_address,
  input  logic        avs_write,
  input  logic [31:0] avs_writedata,
  input  logic        avs_read,
  output logic [31:0] avs_readdata,
  output logic        irq,
  output logic        frame_done,   // one-cycle pulse: a frame is in memory
  // camera pixel stream
  input  logic        px_valid,
  input  logic        px_sof,
  input  data_t       px_data,
  output logic        px_ready,
  // memory-controller port
  output mem_req_t    mem_req,
  input  logic        mem_ready,
  input  mem_rsp_t    mem_rsp
);

  layer_cfg_t  cfg;
  logic        start, busy, done;
  logic [31:0] n_steps, n_wfetch, n_wreuse, n_ireuse, n_overlap, n_stall;
  addr_t       frame_base;
  logic [31:0] frame_words, frame_count;
  logic        done_slot;

  csr_regs u_csr (
    .clk, .rst_n, .avs_address, .avs_write, .avs_writedata, .avs_read,
    .avs_readdata, .irq, .cfg, .start, .busy, .done,
    .n_steps, .n_wfetch, .n_wreuse, .n_ireuse, .n_overlap, .n_stall,
    .frame_base, .frame_words, .frame_count, .done_slot
  );

  mem_req_t [2:0] m_req;
  logic     [2:0] m_ready;
  mem_rsp_t [2:0] m_rsp;

  frame_writer u_fw (
    .clk, .rst_n, .frame_base, .frame_words,
    .px_valid, .px_sof, .px_data, .px_ready,
    .req(m_req[0]), .req_ready(m_ready[0]),
    .frame_done, .done_slot, .frame_count
  );

  conv_engine #(
    .TN(TN), .TM(TM), .KMAX(KMAX), .IBUF_DEPTH(IBUF_DEPTH), .OBUF_DEPTH(OBUF_DEPTH)
  ) u_eng (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .rd_req(m_req[2]), .rd_ready(m_ready[2]), .rd_rsp(m_rsp[2]),
    .wr_req(m_req[1]), .wr_ready(m_ready[1]),
    .n_steps, .n_wfetch, .n_wreuse, .n_ireuse, .n_overlap, .n_stall
  );

  mem_arbiter #(.NP(3), .MAX_READS(MAX_READS)) u_arb (
    .clk, .rst_n, .m_req, .m_ready, .m_rsp,
    .s_req(mem_req), .s_ready(mem_ready), .s_rsp(mem_rsp)
  );

endmodule
