// Two-bank (ping-pong) lane-parallel on-chip buffer.
//
// The buffer holds two tiles, one per bank, so that the DMA can fill one bank
// from external memory while the compute array reads the other. Each bank has
// LANES lanes of DEPTH words. The write port stores one word per cycle into
// (wr_bank, wr_lane, wr_addr), the word width of the external memory port.
// The read port reads the word at rd_addr of every lane of rd_bank at once
// and presents them on rd_data one cycle later (a registered read, as in a
// block RAM).
// Used twice: as the input-feature buffer (LANES = TN input channels) and as
// the weight buffer (LANES = TM*TN, one per multiplier). The two-bank
// organisation follows the buffer1/buffer2 on-chip memory of the tiled
// accelerator the design builds on; sizes and ports are this design's choice.
module pingpong_buffer
  import ssd_accel_pkg::*;
#(
  parameter int LANES = 8,
  parameter int DEPTH = 4096
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic                      wr_bank,
  input  logic [$clog2(LANES)-1:0]  wr_lane,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  data_t                     wr_data,
  input  logic                      rd_en,
  input  logic                      rd_bank,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output data_t [LANES-1:0]         rd_data
);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      data_t mem [DEPTH];
      data_t q;

      always_ff @(posedge clk) begin
        if (wr_en && wr_bank == 1'(b) && wr_lane == $clog2(LANES)'(l))
          mem[wr_addr] <= wr_data;
        if (rd_en) q <= mem[rd_addr];
      end
    end
  end

  // Select the bank read in the previous cycle.
  logic rd_bank_q;
  always_ff @(posedge clk) if (rd_en) rd_bank_q <= rd_bank;

  for (genvar l = 0; l < LANES; l++) begin : g_out
    assign rd_data[l] = rd_bank_q ? g_bank[1].g_lane[l].q : g_bank[0].g_lane[l].q;
  end

endmodule
